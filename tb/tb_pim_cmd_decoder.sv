// tb_pim_cmd_decoder: checks the DDR4/RFU decoding of pim_cmd_decoder.
//
// The GradPIM pin patterns are built here from the truth table (Op0=A12,
// Op1=A17, Param0=A13, Param1=A11, Src/Dst=A10), independently of the
// package's encoder, with random bank group, bank, column and fields. The
// ordinary commands ACT, PRE, RD, WR, MRS and a deselected cycle are checked
// too, and finally the package encoder is checked to round-trip.
module tb_pim_cmd_decoder;
  import gradpim_pkg::*;

  logic      cs_n;
  ddr_pins_t pins;
  dev_cmd_t  cmd;
  int checks = 0, failures = 0;

  pim_cmd_decoder dut (.cs_n(cs_n), .pins(pins), .cmd(cmd));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic ddr_pins_t base(logic ras, logic cas, logic we);
    ddr_pins_t p;
    p = '0;
    p.act_n = 1'b1; p.ras_n = ras; p.cas_n = cas; p.we_n = we;
    p.bg = 2'($urandom); p.ba = 2'($urandom); p.a[9:0] = 10'($urandom);
    return p;
  endfunction

  // {Op0, Op1, Param0, Param1} per operation; x fields filled by caller.
  task automatic try_pim(input pim_op_e exp, input logic op0, op1, input logic [1:0] prm,
                         input logic sd);
    ddr_pins_t p;
    p = base(1'b0, 1'b1, 1'b1);
    p.a[12] = op0; p.a[17] = op1;
    p.a[13] = prm[0]; p.a[11] = prm[1]; p.a[10] = sd;
    cs_n = 1'b0; pins = p;
    #1;
    check(cmd.kind == CMD_PIM, $sformatf("%s kind %0d", exp.name(), cmd.kind));
    check(cmd.op == exp, $sformatf("%s decoded as %s", exp.name(), cmd.op.name()));
    check(cmd.bg == p.bg && cmd.ba == p.ba && cmd.col == p.a[9:0], $sformatf("%s address", exp.name()));
    if (exp inside {OP_SRD, OP_DEQ, OP_QNT})
      check(cmd.param == prm, $sformatf("%s param %0d exp %0d", exp.name(), cmd.param, prm));
    if (!(exp inside {OP_QRD, OP_QWR}))
      check(cmd.sd == sd, $sformatf("%s sd", exp.name()));
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 50; it++) begin
      logic [1:0] prm;
      logic sd;
      prm = 2'($urandom); sd = 1'($urandom);
      try_pim(OP_SRD, 0, 0, prm, sd);
      try_pim(OP_DEQ, 1, 0, prm, sd);
      try_pim(OP_QNT, 1, 1, prm, sd);
      try_pim(OP_WB,  0, 1, 2'b00, sd);
      try_pim(OP_QRD, 0, 1, 2'b01, 1'b0);   // Param0=H, Param1=L, RD
      try_pim(OP_QWR, 0, 1, 2'b01, 1'b1);
      try_pim(OP_ADD, 0, 1, 2'b11, sd);
      try_pim(OP_SUB, 0, 1, 2'b10, sd);      // Param0=L, Param1=H
    end

    // Ordinary commands.
    pins = base(1'b1, 1'b0, 1'b1); cs_n = 0; #1;
    check(cmd.kind == CMD_RD && cmd.op == OP_NONE, "RD");
    pins = base(1'b1, 1'b0, 1'b0); #1;
    check(cmd.kind == CMD_WR, "WR");
    pins = base(1'b0, 1'b1, 1'b0); pins.a[10] = 1'b1; #1;
    check(cmd.kind == CMD_PRE && cmd.ap, "PRE all");
    pins = base(1'b0, 1'b0, 1'b0); pins.bg = 2'b01; pins.ba = 2'b11; pins.a[13:0] = 14'h2abc; #1;
    check(cmd.kind == CMD_MRS && cmd.mr == 3'd7 && cmd.mr_data == 14'h2abc, "MRS MR7");
    pins = base(1'b1, 1'b1, 1'b1); pins.act_n = 1'b0; pins.cas_n = 1'b1; pins.we_n = 1'b0;
    pins.a[13:0] = 14'h1234; #1;
    check(cmd.kind == CMD_ACT && cmd.row == {1'b1, 1'b0, 14'h1234}, "ACT row");
    pins = base(1'b1, 1'b1, 1'b1); #1;
    check(cmd.kind == CMD_NOP, "NOP");
    pins = base(1'b0, 1'b1, 1'b1); cs_n = 1'b1; #1;
    check(cmd.kind == CMD_NOP, "deselected");

    // Round trip through the package encoder.
    cs_n = 1'b0;
    for (int it = 0; it < 200; it++) begin
      pim_uop_t u;
      logic [1:0] bg;
      u.op = pim_op_e'(1 + $urandom_range(0, 7));
      u.bank = 2'($urandom); u.col = 10'($urandom); u.param = 2'($urandom); u.sd = 1'($urandom);
      bg = 2'($urandom);
      pins = encode_pim(u, bg); #1;
      check(cmd.kind == CMD_PIM && cmd.op == u.op && cmd.bg == bg && cmd.ba == u.bank &&
            cmd.col == u.col, $sformatf("round trip %s", u.op.name()));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
