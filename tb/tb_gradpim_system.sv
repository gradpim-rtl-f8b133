// tb_gradpim_system: end-to-end run of one full-size GradPIM channel.
//
// gradpim_system at its default size (4 ranks of eight x8 devices, four
// bank groups each, 16 update streams) is connected to the behavioural
// DRAM model and taken through one complete training-step update:
//   1. an MRS to MR7 reprograms scale id 1 (eta) to 2^-6 + 2^-8 in every
//      device, so the results show that the mode register is used;
//   2. the host opens theta, v, g and the quantized-gradient rows in every
//      bank group of every rank;
//   3. HL_DEQUANT turns the 8-bit gradients into 32-bit gradients in all
//      16 bank groups; while ranks 0-2 work the host writes one quantized
//      gradient column and reads one theta column of rank 3 through
//      ordinary WR/RD (the normal DRAM path), which also preempts the
//      scheduler, before rank 3 is started;
//   4. HL_UPDATE applies momentum SGD with weight decay to every column;
//   5. the host closes the quantized-gradient row and opens the quantized-
//      weight row (PRE/ACT), and HL_QUANT writes 8-bit copies of the new
//      weights.
// All arrays are compared with gradpim_ref_pkg. Each mechanism of the design
// is counted and must have happened at least once: every GradPIM command
// type, the scheduler's waits for tCCD_L, tCCD_S, tPIM and register
// dependences, contention between streams, host preemption, the ordinary
// read path, MRS, and saturation in quantization. The devices must report
// no timing violation and the model no access to a closed row. The whole
// run must also take fewer cycles than the bank groups would need one
// after another at one column command per tCCD_L.
module tb_gradpim_system;
  import gradpim_pkg::*;
  import gradpim_ref_pkg::*;

  localparam int RANKS = 4, CHIPS = 8, BGS = 4, S = RANKS * BGS, L = 4;
  localparam int COLS = 8, QCOLS = COLS / 4;
  localparam int ROW_TH = 11, ROW_V = 22, ROW_G = 33, ROW_QG = 44, ROW_QT = 55;

  logic clk = 0, rst_n = 1;
  logic [S-1:0] hl_valid, hl_ready, pim_busy;
  hl_cmd_t hl [S];
  logic host_valid;
  logic [RANKS-1:0] host_cs_n;
  ddr_pins_t host_pins;
  logic [CHIPS*64-1:0] host_wdata, rdata;
  logic rdata_valid;
  row_cmd_t row_cmd [RANKS][CHIPS];
  bg_req_t bg_req [RANKS][CHIPS][BGS];
  logic [63:0] bg_rdata [RANKS][CHIPS][BGS];
  logic pim_issued, timing_err;
  logic [4:0] sched_ev;
  int m_err;
  int checks = 0, failures = 0, cyc = 0;

  gradpim_system dut (
    .clk(clk), .rst_n(rst_n),
    .hl_valid(hl_valid), .hl_ready(hl_ready), .hl(hl), .pim_busy(pim_busy),
    .host_valid(host_valid), .host_cs_n(host_cs_n), .host_pins(host_pins),
    .host_wdata(host_wdata), .rdata(rdata), .rdata_valid(rdata_valid),
    .row_cmd(row_cmd), .bg_req(bg_req), .bg_rdata(bg_rdata),
    .pim_issued(pim_issued), .sched_ev(sched_ev), .timing_err(timing_err)
  );

  dram_model #(.RANKS(RANKS), .CHIPS(CHIPS), .BGS(BGS), .L(L)) u_mem (
    .clk(clk), .row_cmd(row_cmd), .bg_req(bg_req), .bg_rdata(bg_rdata), .errors(m_err)
  );

  always #5 clk = ~clk;

  // Mechanism counters.
  int n_op [9];
  int n_ev [5];
  int n_preempt = 0, n_rd = 0, n_mrs = 0, n_terr = 0, n_sat = 0, n_pim = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int s = 0; s < S; s++)
        if (dut.op_ready[s]) n_op[int'(dut.op[s].op)]++;
      for (int i = 0; i < 5; i++) if (sched_ev[i]) n_ev[i]++;
      if (host_valid && dut.op_valid != '0) n_preempt++;
      if (rdata_valid) n_rd++;
      if (timing_err) n_terr++;
      if (pim_issued) n_pim++;
      if (!dut.cs_n[0] && dut.pins.act_n && dut.pins.ras_n == 1'b0 &&
          dut.pins.cas_n == 1'b0 && dut.pins.we_n == 1'b0) n_mrs++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // One host command for one cycle (called at a falling edge).
  task automatic host(input logic [RANKS-1:0] csn, input ddr_pins_t p, input logic [CHIPS*64-1:0] d);
    host_valid = 1'b1; host_cs_n = csn; host_pins = p; host_wdata = d;
    @(negedge clk);
    host_valid = 1'b0; host_cs_n = '1; host_pins = PINS_NOP;
  endtask

  function automatic ddr_pins_t act(int bg, int ba, int row);
    ddr_pins_t p;
    p = PINS_NOP; p.act_n = 1'b0; p.bg = 2'(bg); p.ba = 2'(ba);
    p.cas_n = row[15]; p.we_n = row[14]; p.a[13:0] = row[13:0];
    return p;
  endfunction

  function automatic ddr_pins_t pre(int bg, int ba);
    ddr_pins_t p;
    p = PINS_NOP; p.ras_n = 1'b0; p.cas_n = 1'b1; p.we_n = 1'b0;
    p.bg = 2'(bg); p.ba = 2'(ba); p.a[10] = 1'b0;
    return p;
  endfunction

  function automatic ddr_pins_t colcmd(logic wr, int bg, int ba, int col7);
    ddr_pins_t p;
    p = PINS_NOP; p.ras_n = 1'b1; p.cas_n = 1'b0; p.we_n = !wr;
    p.bg = 2'(bg); p.ba = 2'(ba); p.a[9:0] = 10'(col7 << 3);
    return p;
  endfunction

  // MRS to MR7: scaler entry id <= {sop, m, n}.
  function automatic ddr_pins_t mrs7(int id, int sop, int m, int n);
    ddr_pins_t p;
    p = PINS_NOP; p.ras_n = 1'b0; p.cas_n = 1'b0; p.we_n = 1'b0;
    p.bg = 2'b01; p.ba = 2'b11;
    p.a[13:12] = 2'(id); p.a[11:10] = 2'(sop); p.a[9:5] = 5'(m); p.a[4:0] = 5'(n);
    return p;
  endfunction

  // Reference update of one lane with eta = 2^-6 + 2^-8.
  function automatic logic [63:0] upd(logic [31:0] th, logic [31:0] v, logic [31:0] g);
    logic [31:0] vn;
    vn = scale(v, 0, 3, 2) - scale(g, 6, 8, 1) - scale(th, 18, 20, 1);
    return {th + vn, vn};
  endfunction

  task automatic start(int s, hl_kind_e k);
    hl[s] = '{kind: k, first: '0, count: 8'(COLS)};
    hl_valid[s] = 1'b1;
  endtask

  task automatic wait_idle();
    int t0;
    @(negedge clk);
    hl_valid = '0;
    t0 = cyc;
    while (pim_busy != '0 && cyc < t0 + 20000) @(negedge clk);
    check(pim_busy == '0, "streams finished");
    repeat (8) @(negedge clk);
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] th [RANKS][CHIPS][BGS][COLS], vv [RANKS][CHIPS][BGS][COLS];
  logic [63:0] qg [RANKS][CHIPS][BGS][QCOLS];

  initial begin
    logic [CHIPS*64-1:0] wd;
    int t0, t_total;
    hl_valid = '0; host_valid = 0; host_cs_n = '1; host_pins = PINS_NOP; host_wdata = '0;
    for (int s = 0; s < S; s++) hl[s] = '0;
    #1 rst_n = 0;   // a falling edge, so the asynchronous resets act before the first clock
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t_total = cyc;

    // 1. eta of every device through MR7 (broadcast to all ranks).
    host('0, mrs7(1, 1, 8, 6), '0);

    // 2. open the rows.
    for (int g = 0; g < BGS; g++) begin
      host('0, act(g, 0, ROW_TH), '0);
      host('0, act(g, 1, ROW_V), '0);
      host('0, act(g, 2, ROW_G), '0);
      host('0, act(g, 3, ROW_QG), '0);
    end
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++)
        for (int g = 0; g < BGS; g++) begin
          for (int j = 0; j < COLS; j++) begin
            th[r][c][g][j] = {32'($signed($urandom) >>> (j == 5 ? 3 : 10)), 32'($signed($urandom) >>> 10)};
            vv[r][c][g][j] = {32'($signed($urandom) >>> 14), 32'($signed($urandom) >>> 14)};
            u_mem.poke(r, c, g, 0, ROW_TH, j, th[r][c][g][j]);
            u_mem.poke(r, c, g, 1, ROW_V, j, vv[r][c][g][j]);
          end
          for (int q = 0; q < QCOLS; q++) begin
            qg[r][c][g][q] = {$urandom, $urandom};
            u_mem.poke(r, c, g, 3, ROW_QG, q, qg[r][c][g][q]);
          end
        end
    repeat (4) @(negedge clk);

    // 3. dequantize: ranks 0-2 first, host traffic to rank 3, then rank 3.
    t0 = cyc;
    for (int s = 0; s < 12; s++) start(s, HL_DEQUANT);
    repeat (10) @(negedge clk);
    for (int c = 0; c < CHIPS; c++) begin
      qg[3][c][1][1] = {$urandom, $urandom};
      wd[c*64 +: 64] = qg[3][c][1][1];
    end
    host(4'b0111, colcmd(1'b1, 1, 3, 1), wd);
    repeat (6) @(negedge clk);
    host(4'b0111, colcmd(1'b0, 2, 0, 6), '0);
    begin
      int tr;
      tr = cyc;
      while (!rdata_valid && cyc < tr + 20) @(negedge clk);
      for (int c = 0; c < CHIPS; c++)
        check(rdata_valid && rdata[c*64 +: 64] == th[3][c][2][6], $sformatf("host read chip %0d", c));
    end
    for (int c = 0; c < CHIPS; c++)
      check(u_mem.peek(3, c, 1, 3, ROW_QG, 1) == qg[3][c][1][1], $sformatf("host write chip %0d", c));
    repeat (6) @(negedge clk);
    for (int s = 12; s < S; s++) start(s, HL_DEQUANT);
    wait_idle();
    $display("dequantize: %0d cycles", cyc - t0);
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++)
        for (int g = 0; g < BGS; g++)
          for (int j = 0; j < COLS; j++)
            check(u_mem.peek(r, c, g, 2, ROW_G, j) == dequant_quarter(qg[r][c][g][j / 4], j % 4),
                  $sformatf("g r%0d c%0d bg%0d col%0d", r, c, g, j));

    // 4. update.
    t0 = cyc;
    for (int s = 0; s < S; s++) start(s, HL_UPDATE);
    wait_idle();
    $display("update: %0d cycles", cyc - t0);
    check(cyc - t0 < COLS * 5 * 6 * S, "bank groups and ranks work in parallel");
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++)
        for (int g = 0; g < BGS; g++)
          for (int j = 0; j < COLS; j++) begin
            logic [63:0] gj, lo, hi;
            gj = dequant_quarter(qg[r][c][g][j / 4], j % 4);
            lo = upd(th[r][c][g][j][31:0], vv[r][c][g][j][31:0], gj[31:0]);
            hi = upd(th[r][c][g][j][63:32], vv[r][c][g][j][63:32], gj[63:32]);
            vv[r][c][g][j] = {hi[31:0], lo[31:0]};
            th[r][c][g][j] = {hi[63:32], lo[63:32]};
            check(u_mem.peek(r, c, g, 1, ROW_V, j) == vv[r][c][g][j], $sformatf("v r%0d c%0d bg%0d col%0d", r, c, g, j));
            check(u_mem.peek(r, c, g, 0, ROW_TH, j) == th[r][c][g][j], $sformatf("theta r%0d c%0d bg%0d col%0d", r, c, g, j));
          end

    // 5. switch bank 3 to the quantized-weight row, quantize.
    for (int g = 0; g < BGS; g++) host('0, pre(g, 3), '0);
    repeat (4) @(negedge clk);
    for (int g = 0; g < BGS; g++) host('0, act(g, 3, ROW_QT), '0);
    repeat (4) @(negedge clk);
    t0 = cyc;
    for (int s = 0; s < S; s++) start(s, HL_QUANT);
    wait_idle();
    $display("quantize: %0d cycles", cyc - t0);
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++)
        for (int g = 0; g < BGS; g++)
          for (int q = 0; q < QCOLS; q++) begin
            logic [63:0] e;
            for (int p = 0; p < 4; p++) begin
              e[p*16 +: 16] = quant_col(th[r][c][g][4*q + p]);
              for (int h = 0; h < 2; h++) begin
                longint x;
                x = longint'($signed(th[r][c][g][4*q + p][h*32 +: 32]));
                if (x >= (longint'(128) << 16) - (longint'(1) << 15) || x < -(longint'(128) << 16) - (longint'(1) << 15)) n_sat++;
              end
            end
            check(u_mem.peek(r, c, g, 3, ROW_QT, q) == e, $sformatf("quantized theta r%0d c%0d bg%0d q%0d", r, c, g, q));
          end

    $display("total: %0d cycles, %0d GradPIM commands", cyc - t_total, n_pim);
    check(timing_err == 1'b0 && n_terr == 0, "no device timing violation");
    check(m_err == 0, "no access to a closed row");
    $display("commands: SRD %0d DEQ %0d QNT %0d WB %0d QRD %0d QWR %0d ADD %0d SUB %0d",
             n_op[OP_SRD], n_op[OP_DEQ], n_op[OP_QNT], n_op[OP_WB], n_op[OP_QRD], n_op[OP_QWR],
             n_op[OP_ADD], n_op[OP_SUB]);
    for (int o = 1; o < 9; o++) check(n_op[o] > 0, $sformatf("command type %0d issued", o));
    $display("waits (cycles): tCCD_L %0d tCCD_S %0d tPIM %0d dependence %0d contention %0d",
             n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4]);
    for (int i = 0; i < 5; i++) check(n_ev[i] > 0, $sformatf("scheduler wait kind %0d seen", i));
    $display("host preemptions %0d, ordinary reads %0d, MRS %0d, saturated quantizations %0d",
             n_preempt, n_rd, n_mrs, n_sat);
    check(n_preempt > 0, "host preempted the scheduler");
    check(n_rd > 0, "ordinary read path used");
    check(n_mrs > 0, "MRS issued");
    check(n_sat > 0, "quantization saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
