// tb_pim_alu: random registers through all four operations of pim_alu.
//
// The reference computes each lane with 64-bit integers: sums and
// differences wrapped to 32 bits (SUB: the non-destination register minus
// the destination), quantization as floor(x / 2^16 + 1/2) clamped to
// [-128, 127] into quarter pos of RegQ (other quarters unchanged), and
// dequantization as q * 2^16. Words near the saturation limits are mixed in.
module tb_pim_alu;
  import gradpim_pkg::*;

  localparam int QS = 16;
  pim_op_e op;
  logic sd;
  logic [1:0] pos;
  logic [COL_W-1:0] r0, r1, rq, tmp_res, q_res;
  logic tmp_we, q_we;
  int checks = 0, failures = 0;

  pim_alu #(.Q_SHIFT(QS)) dut (
    .op(op), .sd(sd), .pos(pos), .reg0(r0), .reg1(r1), .regq(rq),
    .tmp_we(tmp_we), .tmp_result(tmp_res), .q_we(q_we), .q_result(q_res)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [31:0] lane(logic [63:0] v, int l);
    return v[l*32 +: 32];
  endfunction

  function automatic logic [7:0] qref(logic [31:0] w);
    longint x, q;
    x = longint'($signed(w));
    q = (x + (longint'(1) << (QS - 1)));
    q = (q >= 0) ? (q >> QS) : -((-q + (longint'(1) << QS) - 1) >> QS);
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q[7:0];
  endfunction

  function automatic logic [31:0] rand_word();
    case ($urandom_range(0, 3))
      0: return 32'(($urandom_range(0, 255) - 128) << QS);
      1: return 32'($signed(32'($urandom)) >>> 6);
      default: return $urandom;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      r0 = {rand_word(), rand_word()};
      r1 = {rand_word(), rand_word()};
      rq = {$urandom, $urandom};
      sd = 1'($urandom); pos = 2'($urandom);

      op = OP_ADD; #1;
      check(tmp_we && !q_we, "ADD enables");
      for (int l = 0; l < 2; l++)
        check(lane(tmp_res, l) == lane(r0, l) + lane(r1, l), "ADD lane");

      op = OP_SUB; #1;
      for (int l = 0; l < 2; l++)
        check(lane(tmp_res, l) == (sd ? lane(r0, l) - lane(r1, l) : lane(r1, l) - lane(r0, l)),
              $sformatf("SUB lane sd=%0d", sd));

      op = OP_DEQ; #1;
      check(tmp_we && !q_we, "DEQ enables");
      for (int l = 0; l < 2; l++) begin
        longint e;
        e = longint'($signed(rq[pos*16 + l*8 +: 8])) * (longint'(1) << QS);
        check(lane(tmp_res, l) == e[31:0], "DEQ lane");
      end

      op = OP_QNT; #1;
      check(q_we && !tmp_we, "QNT enables");
      for (int p = 0; p < 4; p++)
        for (int l = 0; l < 2; l++) begin
          logic [7:0] e;
          e = (p == pos) ? qref(lane(sd ? r1 : r0, l)) : rq[p*16 + l*8 +: 8];
          check(q_res[p*16 + l*8 +: 8] == e,
                $sformatf("QNT p=%0d l=%0d x=%0d got %0d exp %0d", p, l,
                          $signed(lane(sd ? r1 : r0, l)), $signed(q_res[p*16 + l*8 +: 8]), $signed(e)));
        end

      op = OP_NONE; #1;
      check(!tmp_we && !q_we, "idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
