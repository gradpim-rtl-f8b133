// tb_gradpim_unit: one GradPIM unit against a small bank group model.
//
// The model holds four banks of 128 columns and returns read data
// BG_RD_LAT cycles after the request. The test drives decoded commands
// spaced by tCCD_L and runs: an ordinary write and read (latency checked),
// the dequantization, momentum update and quantization procedures on random
// data (results checked against gradpim_ref_pkg), the scaled-read latency
// (register changes exactly BG_RD_LAT+1 cycles after the command), scaler
// table programming through MR7, and the timing-error flag for column
// commands closer than tCCD_L and arithmetic closer than tPIM.
module tb_gradpim_unit;
  import gradpim_pkg::*;
  import gradpim_ref_pkg::*;

  localparam int L = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_hit;
  dev_cmd_t cmd;
  logic [63:0] wdata, bg_rdata, rdata, reg0, reg1, regq;
  logic rdata_valid, timing_err;
  bg_req_t bg_req;
  logic [63:0] mem [4][128];
  logic [63:0] rpipe [L];
  int checks = 0, failures = 0;
  int cyc = 0;

  gradpim_unit #(.BG_RD_LAT(L)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_hit(cmd_hit), .cmd(cmd), .wdata(wdata),
    .bg_req(bg_req), .bg_rdata(bg_rdata), .rdata(rdata), .rdata_valid(rdata_valid),
    .timing_err(timing_err), .reg0_o(reg0), .reg1_o(reg1), .regq_o(regq)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Bank group model.
  always_ff @(posedge clk) begin
    rpipe[0] <= bg_req.rd ? mem[bg_req.bank][bg_req.col[9:3]] : 64'hdead_beef_dead_beef;
    for (int i = 1; i < L; i++) rpipe[i] <= rpipe[i-1];
    if (bg_req.wr) mem[bg_req.bank][bg_req.col[9:3]] <= bg_req.wdata;
  end
  assign bg_rdata = rpipe[L-1];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // Called at a falling edge: drive one command for one cycle, then idle for
  // gap-1 cycles, so consecutive calls are gap cycles apart.
  task automatic issue(input cmd_kind_e k, input pim_op_e o, input logic [1:0] bank,
                       input int col, input logic [1:0] prm, input logic sd, input int gap);
    cmd = '0; cmd.kind = k; cmd.op = o; cmd.ba = bank; cmd.col = 10'(col << 3);
    cmd.param = prm; cmd.sd = sd; cmd_hit = 1'b1;
    @(negedge clk);
    cmd_hit = 1'b0; cmd = '0;
    repeat (gap - 1) @(negedge clk);
  endtask

  task automatic pim(input pim_op_e o, input logic [1:0] bank, input int col,
                     input logic [1:0] prm, input logic sd);
    issue(CMD_PIM, o, bank, col, prm, sd, 6);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] th [8], vv [8], gg [8], qg [2];
    int t0;
    cmd = '0; cmd_hit = 0; wdata = '0;
    for (int b = 0; b < 4; b++) for (int c = 0; c < 128; c++) mem[b][c] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Ordinary write and read, read latency BG_RD_LAT + 1.
    @(negedge clk);
    wdata = 64'h0123_4567_89ab_cdef;
    issue(CMD_WR, OP_NONE, 2'd1, 5, 0, 0, 6);
    check(mem[1][5] == 64'h0123_4567_89ab_cdef, "ordinary write");
    @(negedge clk);
    cmd = '0; cmd.kind = CMD_RD; cmd.ba = 2'd1; cmd.col = 10'(5 << 3); cmd_hit = 1;
    t0 = cyc;
    @(negedge clk); cmd_hit = 0; cmd = '0;
    while (!rdata_valid && cyc < t0 + 20) @(negedge clk);
    check(rdata_valid && rdata == 64'h0123_4567_89ab_cdef, "ordinary read data");
    check(cyc - t0 == L + 1, $sformatf("ordinary read latency %0d", cyc - t0));
    repeat (2) @(negedge clk);

    // Dequantization: Q(g) column 1 in bank 3 -> g columns 4..7 in bank 2.
    qg[0] = {$urandom, $urandom};
    mem[3][1] = qg[0];
    pim(OP_QRD, 2'd3, 1, 0, 0);
    check(regq == qg[0], "QRD loads RegQ");
    pim(OP_DEQ, 0, 0, 2'd0, 0);
    pim(OP_DEQ, 0, 0, 2'd1, 1);
    pim(OP_WB, 2'd2, 4, 0, 0);
    pim(OP_DEQ, 0, 0, 2'd2, 0);
    pim(OP_WB, 2'd2, 5, 0, 1);
    pim(OP_DEQ, 0, 0, 2'd3, 1);
    pim(OP_WB, 2'd2, 6, 0, 0);
    pim(OP_WB, 2'd2, 7, 0, 1);
    repeat (2) @(negedge clk);
    for (int k = 0; k < 4; k++)
      check(mem[2][4 + k] == dequant_quarter(qg[0], k), $sformatf("dequant quarter %0d", k));

    // Momentum update on columns 4..7: theta bank 0, v bank 1, g bank 2.
    for (int j = 4; j < 8; j++) begin
      mem[0][j] = {32'($signed($urandom) >>> 4), 32'($signed($urandom) >>> 4)};
      mem[1][j] = {32'($signed($urandom) >>> 10), 32'($signed($urandom) >>> 10)};
      th[j] = mem[0][j]; vv[j] = mem[1][j]; gg[j] = mem[2][j];
    end
    for (int j = 4; j < 8; j++) begin
      pim(OP_SRD, 2'd2, j, SID_ETA, 1);
      pim(OP_SRD, 2'd1, j, SID_ALPHA, 0);
      pim(OP_SUB, 0, 0, 0, 1);
      pim(OP_SRD, 2'd0, j, SID_ETABETA, 0);
      pim(OP_SUB, 0, 0, 0, 0);
      pim(OP_WB, 2'd1, j, 0, 0);
      pim(OP_SRD, 2'd0, j, SID_ONE, 1);
      pim(OP_ADD, 0, 0, 0, 1);
      pim(OP_WB, 2'd0, j, 0, 1);
    end
    repeat (2) @(negedge clk);
    for (int j = 4; j < 8; j++) begin
      logic [127:0] r;
      r = update_col(th[j], vv[j], gg[j]);
      check(mem[1][j] == r[63:0], $sformatf("update v col %0d", j));
      check(mem[0][j] == r[127:64], $sformatf("update theta col %0d", j));
    end

    // Quantization: theta columns 4..7 -> Q(theta) column 1 of bank 3.
    for (int k = 0; k < 4; k++) th[k] = mem[0][4 + k];
    pim(OP_SRD, 2'd0, 4, SID_ONE, 0);
    pim(OP_SRD, 2'd0, 5, SID_ONE, 1);
    pim(OP_QNT, 0, 0, 2'd0, 0);
    pim(OP_SRD, 2'd0, 6, SID_ONE, 0);
    pim(OP_QNT, 0, 0, 2'd1, 1);
    pim(OP_SRD, 2'd0, 7, SID_ONE, 1);
    pim(OP_QNT, 0, 0, 2'd2, 0);
    pim(OP_QNT, 0, 0, 2'd3, 1);
    pim(OP_QWR, 2'd3, 1, 0, 1);
    repeat (2) @(negedge clk);
    check(mem[3][1] == {quant_col(th[3]), quant_col(th[2]), quant_col(th[1]), quant_col(th[0])},
          "quantized column");

    // Scaled read latency and MR7 programming: id 1 := 2^-1 + 2^-2.
    @(negedge clk);
    cmd = '0; cmd.kind = CMD_MRS; cmd.mr = 3'd7;
    cmd.mr_data = {2'd1, 2'd1, 5'd2, 5'd1}; cmd_hit = 1;
    @(negedge clk); cmd_hit = 0; cmd = '0;
    mem[0][9] = {32'd4000, -32'sd4000};
    @(negedge clk);
    cmd = '0; cmd.kind = CMD_PIM; cmd.op = OP_SRD; cmd.ba = 0; cmd.col = 10'(9 << 3);
    cmd.param = 2'd1; cmd.sd = 0; cmd_hit = 1;
    t0 = cyc;
    @(negedge clk); cmd_hit = 0; cmd = '0;
    while (reg0 != {32'd3000, -32'sd3000} && cyc < t0 + 20) @(negedge clk);
    check(reg0 == {32'd3000, -32'sd3000}, "programmed scale 0.75");
    check(cyc - t0 == L + 1, $sformatf("scaled read latency %0d", cyc - t0));
    check(!timing_err, "no timing error so far");

    // Timing rules: column commands 2 cycles apart.
    issue(CMD_PIM, OP_SRD, 0, 1, 0, 0, 2);
    issue(CMD_PIM, OP_SRD, 0, 2, 0, 1, 8);
    check(timing_err, "tCCD_L violation flagged");
    rst_n = 0; @(negedge clk); rst_n = 1;
    check(!timing_err, "reset clears flag");
    issue(CMD_PIM, OP_ADD, 0, 0, 0, 0, 4);
    issue(CMD_PIM, OP_ADD, 0, 0, 0, 1, 8);
    check(timing_err, "tPIM violation flagged");
    rst_n = 0; @(negedge clk); rst_n = 1;
    issue(CMD_PIM, OP_ADD, 0, 0, 0, 0, 5);
    issue(CMD_PIM, OP_ADD, 0, 0, 0, 1, 2);
    issue(CMD_PIM, OP_SRD, 0, 3, 0, 0, 6);
    issue(CMD_PIM, OP_SRD, 0, 4, 0, 0, 6);
    check(!timing_err, "spacing of exactly tPIM / tCCD_L accepted");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
