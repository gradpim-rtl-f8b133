// tb_pim_update_sequencer: the command streams of the three procedures.
//
// For each high-level command the testbench collects every GradPIM command
// the sequencer hands out (op_ready is toggled at random, so the handshake
// is exercised) and compares it with the expected list written out here
// from the procedures: nine commands per column of an update, nine per
// quantized column of a dequantization or quantization. It also checks
// hl_ready/busy and that a zero-length command does nothing.
module tb_pim_update_sequencer;
  import gradpim_pkg::*;

  logic clk = 0, rst_n = 0;
  logic hl_valid, hl_ready, op_valid, op_ready, busy;
  hl_cmd_t hl;
  pim_uop_t op;
  pim_uop_t got [$];
  pim_uop_t exp [$];
  int checks = 0, failures = 0;

  pim_update_sequencer dut (
    .clk(clk), .rst_n(rst_n), .hl_valid(hl_valid), .hl_ready(hl_ready), .hl(hl),
    .op_valid(op_valid), .op_ready(op_ready), .op(op), .busy(busy)
  );

  always #5 clk = ~clk;

  always @(posedge clk) if (op_valid && op_ready) got.push_back(op);
  always @(negedge clk) op_ready <= 1'($urandom_range(0, 2) != 0);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic pim_uop_t u(pim_op_e o, int b, int j, int p, int s);
    pim_uop_t x;
    x.op = o; x.bank = 2'(b); x.col = 10'(j << 3); x.param = 2'(p); x.sd = 1'(s);
    if (!op_is_col(o)) begin x.bank = 0; x.col = 0; end
    return x;
  endfunction

  task automatic run(input hl_kind_e k, input int first, input int count);
    got.delete();
    @(negedge clk);
    check(hl_ready && !busy, "idle before command");
    hl_valid = 1; hl.kind = k; hl.first = 7'(first); hl.count = 8'(count);
    @(negedge clk);
    hl_valid = 0;
    while (busy) @(negedge clk);
    check(got.size() == exp.size(), $sformatf("%s: %0d commands, expected %0d", k.name(), got.size(), exp.size()));
    for (int i = 0; i < exp.size() && i < got.size(); i++)
      check(got[i] == exp[i], $sformatf("%s cmd %0d: got %s b%0d c%0d p%0d s%0d exp %s b%0d c%0d p%0d s%0d",
            k.name(), i, got[i].op.name(), got[i].bank, got[i].col, got[i].param, got[i].sd,
            exp[i].op.name(), exp[i].bank, exp[i].col, exp[i].param, exp[i].sd));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hl_valid = 0; hl = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    exp.delete();
    for (int j = 5; j < 8; j++) begin
      exp.push_back(u(OP_SRD, 2, j, 1, 1));
      exp.push_back(u(OP_SRD, 1, j, 2, 0));
      exp.push_back(u(OP_SUB, 0, 0, 0, 1));
      exp.push_back(u(OP_SRD, 0, j, 3, 0));
      exp.push_back(u(OP_SUB, 0, 0, 0, 0));
      exp.push_back(u(OP_WB,  1, j, 0, 0));
      exp.push_back(u(OP_SRD, 0, j, 0, 1));
      exp.push_back(u(OP_ADD, 0, 0, 0, 1));
      exp.push_back(u(OP_WB,  0, j, 0, 1));
    end
    run(HL_UPDATE, 5, 3);

    exp.delete();
    for (int q = 2; q < 4; q++) begin
      exp.push_back(u(OP_QRD, 3, q, 0, 0));
      exp.push_back(u(OP_DEQ, 0, 0, 0, 0));
      exp.push_back(u(OP_DEQ, 0, 0, 1, 1));
      exp.push_back(u(OP_WB,  2, 4*q,   0, 0));
      exp.push_back(u(OP_DEQ, 0, 0, 2, 0));
      exp.push_back(u(OP_WB,  2, 4*q+1, 0, 1));
      exp.push_back(u(OP_DEQ, 0, 0, 3, 1));
      exp.push_back(u(OP_WB,  2, 4*q+2, 0, 0));
      exp.push_back(u(OP_WB,  2, 4*q+3, 0, 1));
    end
    run(HL_DEQUANT, 8, 8);

    exp.delete();
    for (int q = 31; q < 32; q++) begin
      exp.push_back(u(OP_SRD, 0, 4*q,   0, 0));
      exp.push_back(u(OP_SRD, 0, 4*q+1, 0, 1));
      exp.push_back(u(OP_QNT, 0, 0, 0, 0));
      exp.push_back(u(OP_SRD, 0, 4*q+2, 0, 0));
      exp.push_back(u(OP_QNT, 0, 0, 1, 1));
      exp.push_back(u(OP_SRD, 0, 4*q+3, 0, 1));
      exp.push_back(u(OP_QNT, 0, 0, 2, 0));
      exp.push_back(u(OP_QNT, 0, 0, 3, 1));
      exp.push_back(u(OP_QWR, 3, q, 0, 0));
    end
    run(HL_QUANT, 124, 4);

    exp.delete();
    run(HL_UPDATE, 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
