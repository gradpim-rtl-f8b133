// gradpim_device: the logic of one x8 GradPIM DDR4 device.
//
// One command decoder and one gradpim_unit per bank group. The decoded
// command goes to the unit of its bank group (an MRS goes to all of them),
// ACT and PRE go straight to the banks on row_cmd, and the column requests
// of the units go to the bank group I/O gating of each bank group on bg_req.
// Each unit has its own registers, so the bank groups work in parallel while
// ordinary reads and writes still pass through to the global I/O.
//
// The global side is one 64-bit column word per command (wdata with the WR
// command, rdata/rdata_valid BG_RD_LAT+1 cycles after RD). Serialisation into
// bursts, tCL and tCWL belong to the DDR4 I/O, which GradPIM leaves as it is
// and which is not part of this model.
//
// The organisation (a unit per bank group next to its I/O gating, the global
// I/O shared) follows the paper; the single-word global interface is this
// design's simplification.
module gradpim_device
  import gradpim_pkg::*;
#(
  parameter int BGS       = 4,
  parameter int BG_RD_LAT = 4,
  parameter int T_PIM     = 5,
  parameter int T_CCD_L   = 6,
  parameter int Q_SHIFT   = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cs_n,
  input  ddr_pins_t        pins,
  input  logic [COL_W-1:0] wdata,
  output logic [COL_W-1:0] rdata,
  output logic             rdata_valid,
  output row_cmd_t         row_cmd,
  output bg_req_t          bg_req   [BGS],
  input  logic [COL_W-1:0] bg_rdata [BGS],
  output logic [BGS-1:0]   timing_err
);

  dev_cmd_t         cmd;
  logic [COL_W-1:0] u_rdata  [BGS];
  logic [BGS-1:0]   u_rvalid;

  pim_cmd_decoder u_dec (.cs_n(cs_n), .pins(pins), .cmd(cmd));

  always_comb begin
    row_cmd         = '0;
    row_cmd.act     = (cmd.kind == CMD_ACT);
    row_cmd.pre     = (cmd.kind == CMD_PRE);
    row_cmd.pre_all = (cmd.kind == CMD_PRE) && cmd.ap;
    row_cmd.bg      = cmd.bg;
    row_cmd.ba      = cmd.ba;
    row_cmd.row     = cmd.row;
  end

  for (genvar g = 0; g < BGS; g++) begin : g_bg
    logic hit;
    assign hit = (cmd.kind == CMD_MRS) ||
                 (cmd.kind inside {CMD_RD, CMD_WR, CMD_PIM} && cmd.bg == 2'(g));
    gradpim_unit #(
      .BG_RD_LAT(BG_RD_LAT), .T_PIM(T_PIM), .T_CCD_L(T_CCD_L), .Q_SHIFT(Q_SHIFT)
    ) u_unit (
      .clk(clk), .rst_n(rst_n), .cmd_hit(hit), .cmd(cmd), .wdata(wdata),
      .bg_req(bg_req[g]), .bg_rdata(bg_rdata[g]),
      .rdata(u_rdata[g]), .rdata_valid(u_rvalid[g]),
      .timing_err(timing_err[g]),
      .reg0_o(), .reg1_o(), .regq_o()
    );
  end

  // Global I/O: at most one bank group returns ordinary read data at a time.
  always_comb begin
    rdata       = '0;
    rdata_valid = |u_rvalid;
    for (int g = 0; g < BGS; g++)
      if (u_rvalid[g]) rdata = rdata | u_rdata[g];
  end

endmodule
