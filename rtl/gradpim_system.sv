// gradpim_system: one memory channel of GradPIM-Buffered.
//
// The buffer device receives high-level update commands, one port per rank
// and bank group, and expands each with its own pim_update_sequencer. The
// pim_cmd_scheduler merges the sequencers' GradPIM commands with ordinary
// DDR4 commands of the host (the NPU's memory controller) onto the channel's
// single command bus. On the channel sit RANKS ranks of CHIPS x8 GradPIM
// devices; the devices of a rank share chip select and command, and each
// works on its own 64-bit slice of a 64-byte rank column (the non-interleaved
// placement that keeps every 32-bit word in one device). The DRAM arrays
// themselves are outside: every device's bank group column requests leave on
// bg_req and their data return on bg_rdata, BG_RD_LAT cycles later; ACT/PRE
// leave on row_cmd.
//
// Timing: commands and host write data are registered once in the buffer,
// so a host command reaches the devices one cycle after host_valid. Read
// data appear on rdata/rdata_valid BG_RD_LAT+1 cycles after that.
//
// The configuration (4 ranks, 4 bank groups of 4 banks, x8 devices,
// DDR4-2133 timing tCCD_L = 6, tCCD_S = 4, tPIM = 5 cycles) is the paper's
// evaluation setup. Passing high-level commands and host commands as
// parallel ports instead of over a serial link is this design's
// simplification.
module gradpim_system
  import gradpim_pkg::*;
#(
  parameter int RANKS     = 4,
  parameter int CHIPS     = 8,
  parameter int BGS       = 4,
  parameter int BG_RD_LAT = 4,
  parameter int T_CCD_L   = 6,
  parameter int T_CCD_S   = 4,
  parameter int T_PIM     = 5,
  parameter int Q_SHIFT   = 16,
  localparam int S        = RANKS * BGS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // high-level commands, stream s = rank * BGS + bank group
  input  logic [S-1:0]           hl_valid,
  output logic [S-1:0]           hl_ready,
  input  hl_cmd_t                hl       [S],
  output logic [S-1:0]           pim_busy,
  // ordinary DDR4 commands of the host
  input  logic                   host_valid,
  input  logic [RANKS-1:0]       host_cs_n,
  input  ddr_pins_t              host_pins,
  input  logic [CHIPS*COL_W-1:0] host_wdata,
  output logic [CHIPS*COL_W-1:0] rdata,
  output logic                   rdata_valid,
  // to the DRAM arrays
  output row_cmd_t               row_cmd  [RANKS][CHIPS],
  output bg_req_t                bg_req   [RANKS][CHIPS][BGS],
  input  logic [COL_W-1:0]       bg_rdata [RANKS][CHIPS][BGS],
  // status
  output logic                   pim_issued,
  output logic [4:0]             sched_ev,
  output logic                   timing_err
);

  logic [S-1:0]           op_valid, op_ready;
  pim_uop_t               op [S];
  logic [RANKS-1:0]       cs_n;
  ddr_pins_t              pins;
  logic [CHIPS*COL_W-1:0] wdata_q;

  for (genvar s = 0; s < S; s++) begin : g_seq
    pim_update_sequencer u_seq (
      .clk(clk), .rst_n(rst_n),
      .hl_valid(hl_valid[s]), .hl_ready(hl_ready[s]), .hl(hl[s]),
      .op_valid(op_valid[s]), .op_ready(op_ready[s]), .op(op[s]),
      .busy(pim_busy[s])
    );
  end

  pim_cmd_scheduler #(
    .RANKS(RANKS), .BGS(BGS), .T_CCD_L(T_CCD_L), .T_CCD_S(T_CCD_S), .T_PIM(T_PIM)
  ) u_sched (
    .clk(clk), .rst_n(rst_n),
    .host_valid(host_valid), .host_cs_n(host_cs_n), .host_pins(host_pins),
    .op_valid(op_valid), .op(op), .op_ready(op_ready),
    .cs_n(cs_n), .pins(pins), .pim_issued(pim_issued), .ev(sched_ev)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wdata_q <= '0;
    else if (host_valid) wdata_q <= host_wdata;
  end

  logic [COL_W-1:0]     dev_rdata  [RANKS][CHIPS];
  logic [RANKS-1:0]     dev_rvalid [CHIPS];
  logic [BGS-1:0]       dev_terr   [RANKS][CHIPS];

  for (genvar r = 0; r < RANKS; r++) begin : g_rank
    for (genvar c = 0; c < CHIPS; c++) begin : g_chip
      gradpim_device #(
        .BGS(BGS), .BG_RD_LAT(BG_RD_LAT), .T_PIM(T_PIM), .T_CCD_L(T_CCD_L), .Q_SHIFT(Q_SHIFT)
      ) u_dev (
        .clk(clk), .rst_n(rst_n), .cs_n(cs_n[r]), .pins(pins),
        .wdata(wdata_q[c*COL_W +: COL_W]),
        .rdata(dev_rdata[r][c]), .rdata_valid(dev_rvalid[c][r]),
        .row_cmd(row_cmd[r][c]),
        .bg_req(bg_req[r][c]), .bg_rdata(bg_rdata[r][c]),
        .timing_err(dev_terr[r][c])
      );
    end
  end

  always_comb begin
    rdata       = '0;
    rdata_valid = |dev_rvalid[0];
    timing_err  = 1'b0;
    for (int c = 0; c < CHIPS; c++)
      for (int r = 0; r < RANKS; r++) begin
        if (dev_rvalid[c][r]) rdata[c*COL_W +: COL_W] = rdata[c*COL_W +: COL_W] | dev_rdata[r][c];
        timing_err = timing_err | (|dev_terr[r][c]);
      end
  end

endmodule
