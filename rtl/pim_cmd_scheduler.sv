// pim_cmd_scheduler: puts GradPIM commands on the DDR4 command bus.
//
// One command per cycle leaves on the bus (registered cs_n and pins). Host
// commands (ordinary DDR4 traffic of the NPU's memory controller) win the
// bus whenever host_valid is high; the host keeps its own timing. Otherwise
// the scheduler looks at the head command of every stream (one stream per
// rank and bank group, in order) and, starting after the last stream served,
// issues the first one that may go:
//
//   column commands (SRD, WB, QRD, QWR)  tCCD_L since the last column command
//                                        of the bank group, tCCD_S since the
//                                        last of the rank
//   arithmetic (ADD, SUB, QNT, DEQ)      tPIM since the last arithmetic
//                                        command of the bank group
//   register dependences                 every register the command reads or
//                                        writes is ready: tCCD_L after a
//                                        read into it, tPIM after an
//                                        arithmetic result into it
//
// Host RD/WR also restart the column timers of their bank group and rank.
// The timing rules come from the paper (scaled read and writeback behave as
// column commands held for tCCD_L, tPIM blocks only arithmetic of the same
// bank group); round-robin choice and the register scoreboard are this
// design's. ev reports, every cycle, why streams waited, for monitoring.
module pim_cmd_scheduler
  import gradpim_pkg::*;
#(
  parameter int RANKS   = 4,
  parameter int BGS     = 4,
  parameter int T_CCD_L = 6,
  parameter int T_CCD_S = 4,
  parameter int T_PIM   = 5,
  localparam int S      = RANKS * BGS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             host_valid,
  input  logic [RANKS-1:0] host_cs_n,
  input  ddr_pins_t        host_pins,
  input  logic [S-1:0]     op_valid,
  input  pim_uop_t         op [S],
  output logic [S-1:0]     op_ready,
  output logic [RANKS-1:0] cs_n,
  output ddr_pins_t        pins,
  output logic             pim_issued,
  output logic [4:0]       ev      // {several eligible, wait dep, wait tPIM, wait tCCD_S, wait tCCD_L}
);

  localparam int SW = (S > 1) ? $clog2(S) : 1;

  logic [3:0] col_rem  [S];
  logic [3:0] alu_rem  [S];
  logic [3:0] reg_rem  [S][3];
  logic [3:0] rank_rem [RANKS];
  logic [SW-1:0] rr;

  logic [S-1:0] elig, w_ccdl, w_ccds, w_pim, w_dep;
  logic         any_elig;
  logic [SW-1:0] pick;

  function automatic logic [2:0] reg_use(pim_op_e o, logic sd);
    logic [2:0] r;
    logic [2:0] t;
    t = sd ? 3'b010 : 3'b001;
    unique case (o)
      OP_SRD, OP_WB:   r = t;
      OP_QRD, OP_QWR:  r = 3'b100;
      OP_ADD, OP_SUB:  r = 3'b011;
      OP_QNT, OP_DEQ:  r = t | 3'b100;
      default:         r = 3'b000;
    endcase
    return r;
  endfunction

  always_comb begin
    for (int s = 0; s < S; s++) begin
      logic [2:0] use_m;
      logic       dep_ok;
      use_m  = reg_use(op[s].op, op[s].sd);
      dep_ok = 1'b1;
      for (int k = 0; k < 3; k++)
        if (use_m[k] && reg_rem[s][k] != 0) dep_ok = 1'b0;
      w_ccdl[s] = op_valid[s] && op_is_col(op[s].op) && col_rem[s] != 0;
      w_ccds[s] = op_valid[s] && op_is_col(op[s].op) && rank_rem[s / BGS] != 0;
      w_pim[s]  = op_valid[s] && op_is_alu(op[s].op) && alu_rem[s] != 0;
      w_dep[s]  = op_valid[s] && !dep_ok;
      elig[s]   = op_valid[s] && !host_valid && !w_ccdl[s] && !w_ccds[s] && !w_pim[s] && dep_ok;
    end
    any_elig = 1'b0;
    pick     = '0;
    for (int i = 0; i < S; i++) begin
      if (!any_elig && elig[(int'(rr) + i) % S]) begin
        any_elig = 1'b1;
        pick     = SW'((int'(rr) + i) % S);
      end
    end
    op_ready = '0;
    if (any_elig) op_ready[pick] = 1'b1;
  end

  pim_uop_t pick_op;
  int       pick_rank;
  assign pick_op   = op[pick];
  assign pick_rank = int'(pick) / BGS;

  // Host column command: which rank and bank group it occupies.
  logic host_col;
  int   host_rank;
  always_comb begin
    host_col  = host_valid && host_pins.act_n && host_pins.ras_n && !host_pins.cas_n;
    host_rank = 0;
    for (int r = RANKS - 1; r >= 0; r--)
      if (!host_cs_n[r]) host_rank = r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_n       <= '1;
      pins       <= PINS_NOP;
      pim_issued <= 1'b0;
      rr         <= '0;
      ev         <= '0;
      for (int s = 0; s < S; s++) begin
        col_rem[s] <= '0;
        alu_rem[s] <= '0;
        for (int k = 0; k < 3; k++) reg_rem[s][k] <= '0;
      end
      for (int r = 0; r < RANKS; r++) rank_rem[r] <= '0;
    end else begin
      // Count down.
      for (int s = 0; s < S; s++) begin
        if (col_rem[s] != 0) col_rem[s] <= col_rem[s] - 4'd1;
        if (alu_rem[s] != 0) alu_rem[s] <= alu_rem[s] - 4'd1;
        for (int k = 0; k < 3; k++)
          if (reg_rem[s][k] != 0) reg_rem[s][k] <= reg_rem[s][k] - 4'd1;
      end
      for (int r = 0; r < RANKS; r++)
        if (rank_rem[r] != 0) rank_rem[r] <= rank_rem[r] - 4'd1;

      ev         <= {($countones(elig) > 1), |w_dep, |w_pim, |w_ccds, |w_ccdl};
      pim_issued <= 1'b0;

      if (host_valid) begin
        cs_n <= host_cs_n;
        pins <= host_pins;
        if (host_col) begin
          col_rem[host_rank * BGS + int'(host_pins.bg)] <= 4'(T_CCD_L - 1);
          rank_rem[host_rank]                           <= 4'(T_CCD_S - 1);
        end
      end else if (any_elig) begin
        cs_n       <= ~(RANKS'(1) << pick_rank);
        pins       <= encode_pim(pick_op, 2'(int'(pick) % BGS));
        pim_issued <= 1'b1;
        rr         <= (int'(pick) == S - 1) ? '0 : pick + 1'b1;
        if (op_is_col(pick_op.op)) begin
          col_rem[pick]       <= 4'(T_CCD_L - 1);
          rank_rem[pick_rank] <= 4'(T_CCD_S - 1);
        end
        if (op_is_alu(pick_op.op)) alu_rem[pick] <= 4'(T_PIM - 1);
        unique case (pick_op.op)
          OP_SRD:                 reg_rem[pick][pick_op.sd ? 1 : 0] <= 4'(T_CCD_L - 1);
          OP_QRD:                 reg_rem[pick][2]                  <= 4'(T_CCD_L - 1);
          OP_ADD, OP_SUB, OP_DEQ: reg_rem[pick][pick_op.sd ? 1 : 0] <= 4'(T_PIM - 1);
          OP_QNT:                 reg_rem[pick][2]                  <= 4'(T_PIM - 1);
          default: ;
        endcase
      end else begin
        cs_n <= '1;
        pins <= PINS_NOP;
      end
    end
  end

  // The bus carries one command per cycle and a stream is served only when
  // its command is present.
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(op_ready));
  a_grant_valid: assert property (@(posedge clk) disable iff (!rst_n) (op_ready & ~op_valid) == '0);

endmodule
