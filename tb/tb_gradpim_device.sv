// tb_gradpim_device: one x8 device with all four bank groups working at once.
//
// The testbench plays the memory controller on the device pins (using the
// package encoder, itself checked against the truth table in
// tb_pim_cmd_decoder). It opens the theta, v and g rows in every bank group,
// writes one g column per bank group through ordinary WR commands, reads one
// back through an ordinary RD (global I/O bypass), then runs the momentum
// update over COLS columns in all four bank groups interleaved: the bank
// groups take turns cycle by cycle, each bank group gets a command every
// four cycles and every command is tCCD_L = 6 cycles or more after the
// previous one of its bank group. Results are checked against
// gradpim_ref_pkg, the device must report no timing error, and the whole
// update must finish in the expected number of cycles, which is four times
// fewer than running the bank groups one after another.
module tb_gradpim_device;
  import gradpim_pkg::*;
  import gradpim_ref_pkg::*;

  localparam int BGS = 4, L = 4, COLS = 8;
  localparam int ROW_TH = 100, ROW_V = 200, ROW_G = 300;
  localparam int SLOT = 8;   // cycles between commands of one bank group

  logic clk = 0, rst_n = 1;
  logic cs_n;
  ddr_pins_t pins;
  logic [63:0] wdata, rdata;
  logic rdata_valid;
  row_cmd_t row_cmd;
  bg_req_t bg_req [BGS];
  logic [63:0] bg_rdata [BGS];
  logic [BGS-1:0] timing_err;
  row_cmd_t m_row [1][1];
  bg_req_t m_req [1][1][BGS];
  logic [63:0] m_rdata [1][1][BGS];
  int m_err;
  int checks = 0, failures = 0, cyc = 0;

  gradpim_device #(.BGS(BGS), .BG_RD_LAT(L)) dut (
    .clk(clk), .rst_n(rst_n), .cs_n(cs_n), .pins(pins), .wdata(wdata),
    .rdata(rdata), .rdata_valid(rdata_valid), .row_cmd(row_cmd),
    .bg_req(bg_req), .bg_rdata(bg_rdata), .timing_err(timing_err)
  );

  assign m_row[0][0] = row_cmd;
  for (genvar g = 0; g < BGS; g++) begin : g_w
    assign m_req[0][0][g] = bg_req[g];
    assign bg_rdata[g]    = m_rdata[0][0][g];
  end
  dram_model #(.RANKS(1), .CHIPS(1), .BGS(BGS), .L(L)) u_mem (
    .clk(clk), .row_cmd(m_row), .bg_req(m_req), .bg_rdata(m_rdata), .errors(m_err)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // Drive pins for one cycle (called at a falling edge).
  task automatic drive(input ddr_pins_t p);
    cs_n = 1'b0; pins = p;
    @(negedge clk);
    cs_n = 1'b1; pins = PINS_NOP;
  endtask

  function automatic ddr_pins_t act(int bg, int ba, int row);
    ddr_pins_t p;
    p = PINS_NOP; p.act_n = 1'b0; p.bg = 2'(bg); p.ba = 2'(ba);
    p.cas_n = row[15]; p.we_n = row[14]; p.a[13:0] = row[13:0];
    return p;
  endfunction

  function automatic ddr_pins_t colcmd(logic wr, int bg, int ba, int col7);
    ddr_pins_t p;
    p = PINS_NOP; p.ras_n = 1'b1; p.cas_n = 1'b0; p.we_n = !wr;
    p.bg = 2'(bg); p.ba = 2'(ba); p.a[9:0] = 10'(col7 << 3);
    return p;
  endfunction

  function automatic pim_uop_t step(int st, int j);
    pim_uop_t u;
    u = '0; u.col = 10'(j << 3);
    case (st)
      0: begin u.op = OP_SRD; u.bank = 2; u.param = SID_ETA;     u.sd = 1; end
      1: begin u.op = OP_SRD; u.bank = 1; u.param = SID_ALPHA;   u.sd = 0; end
      2: begin u.op = OP_SUB; u.sd = 1; end
      3: begin u.op = OP_SRD; u.bank = 0; u.param = SID_ETABETA; u.sd = 0; end
      4: begin u.op = OP_SUB; u.sd = 0; end
      5: begin u.op = OP_WB;  u.bank = 1; u.sd = 0; end
      6: begin u.op = OP_SRD; u.bank = 0; u.param = SID_ONE;     u.sd = 1; end
      7: begin u.op = OP_ADD; u.sd = 1; end
      default: begin u.op = OP_WB; u.bank = 0; u.sd = 1; end
    endcase
    return u;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] th [BGS][COLS], vv [BGS][COLS], gg [BGS][COLS];
    int t0, t1;
    cs_n = 1; pins = PINS_NOP; wdata = '0;
    #1 rst_n = 0;   // a falling edge, so the asynchronous resets act before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int g = 0; g < BGS; g++) begin
      drive(act(g, 0, ROW_TH));
      drive(act(g, 1, ROW_V));
      drive(act(g, 2, ROW_G));
    end
    repeat (4) @(negedge clk);

    for (int g = 0; g < BGS; g++)
      for (int j = 0; j < COLS; j++) begin
        th[g][j] = {32'($signed($urandom) >>> 4),  32'($signed($urandom) >>> 4)};
        vv[g][j] = {32'($signed($urandom) >>> 10), 32'($signed($urandom) >>> 10)};
        gg[g][j] = {32'($signed($urandom) >>> 8),  32'($signed($urandom) >>> 8)};
        u_mem.poke(0, 0, g, 0, ROW_TH, j, th[g][j]);
        u_mem.poke(0, 0, g, 1, ROW_V,  j, vv[g][j]);
        if (j != 0) u_mem.poke(0, 0, g, 2, ROW_G, j, gg[g][j]);
      end

    // Gradient column 0 of every bank group arrives through ordinary writes.
    for (int g = 0; g < BGS; g++) begin
      wdata = gg[g][0];
      drive(colcmd(1'b1, g, 2, 0));
      repeat (5) @(negedge clk);
    end
    for (int g = 0; g < BGS; g++)
      check(u_mem.peek(0, 0, g, 2, ROW_G, 0) == gg[g][0], $sformatf("ordinary write bg%0d", g));

    // Ordinary read of bank group 2's theta column 3 through the global I/O.
    drive(colcmd(1'b0, 2, 0, 3));
    t0 = cyc;
    while (!rdata_valid && cyc < t0 + 20) @(negedge clk);
    check(rdata_valid && rdata == th[2][3], "ordinary read through the global I/O");
    repeat (6) @(negedge clk);

    // Momentum update, four bank groups interleaved.
    t0 = cyc;
    for (int j = 0; j < COLS; j++)
      for (int st = 0; st < 9; st++)
        for (int g = 0; g < BGS; g++) begin
          drive(encode_pim(step(st, j), 2'(g)));
          repeat (SLOT / BGS - 1) @(negedge clk);
        end
    t1 = cyc;
    repeat (8) @(negedge clk);
    check(t1 - t0 == COLS * 9 * SLOT,
          $sformatf("update of %0d columns x %0d bank groups took %0d cycles", COLS, BGS, t1 - t0));

    for (int g = 0; g < BGS; g++)
      for (int j = 0; j < COLS; j++) begin
        logic [127:0] r;
        r = update_col(th[g][j], vv[g][j], gg[g][j]);
        check(u_mem.peek(0, 0, g, 1, ROW_V, j) == r[63:0], $sformatf("v bg%0d col%0d", g, j));
        check(u_mem.peek(0, 0, g, 0, ROW_TH, j) == r[127:64], $sformatf("theta bg%0d col%0d", g, j));
      end
    check(timing_err == '0, "no timing errors");
    check(m_err == 0, "no access to closed rows");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
