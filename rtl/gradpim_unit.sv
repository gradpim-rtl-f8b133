// gradpim_unit: the GradPIM unit of one bank group.
//
// Sits between the bank group I/O gating and the global I/O gating. It
// holds two temporary registers (Reg0, Reg1) and a quantization register
// (RegQ), each as wide as one column access of the device (64 bits for x8),
// the four-entry scaler table, a pim_scaler on the read path and a pim_alu.
// Commands (already decoded, cmd_hit = addressed to this bank group):
//
//   RD / WR     ordinary column access: the unit only forwards it. Read data
//               return to the global I/O (rdata, rdata_valid); write data
//               come from the global I/O (wdata).
//   SRD         scaled read: column read, data scaled by table[param] on the
//               way into Reg[sd].
//   QRD / QWR   column read into RegQ / RegQ written to the column.
//   WB          Reg[sd] written to the column.
//   ADD, SUB,   parallel arithmetic (see pim_alu); result written at the end
//   QNT, DEQ    of the command cycle.
//   MRS MR7     writes scaler table entry A[13:12]: sop A[11:10], m A[9:5],
//               n A[4:0]. Taken by every unit of the device.
//
// Timing: a column read returns BG_RD_LAT cycles after the command (the bank
// group model or array must honour the same constant), and the unit writes
// the register at the end of that cycle, so BG_RD_LAT must not exceed tCCD_L
// for a scaled read to be complete after tCCD_L as the memory controller
// assumes. WB and QWR take the register value in the command cycle. The unit
// checks the spacing rules the memory controller has to keep (tCCD_L between
// column commands of the bank group, tPIM between arithmetic commands) and
// raises the sticky timing_err if one is broken.
//
// The register set, scaler placement, the command set and the timing rules
// are the paper's. The table's reset contents (1.0, eta ~ 0.01, alpha ~ 0.9,
// eta*beta ~ 5e-6), the MR7 layout, the fixed read latency and the one-cycle
// arithmetic are this design's choices.
module gradpim_unit
  import gradpim_pkg::*;
#(
  parameter int BG_RD_LAT = 4,
  parameter int T_PIM     = 5,
  parameter int T_CCD_L   = 6,
  parameter int Q_SHIFT   = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_hit,
  input  dev_cmd_t         cmd,
  input  logic [COL_W-1:0] wdata,
  output bg_req_t          bg_req,
  input  logic [COL_W-1:0] bg_rdata,
  output logic [COL_W-1:0] rdata,
  output logic             rdata_valid,
  output logic             timing_err,
  output logic [COL_W-1:0] reg0_o,
  output logic [COL_W-1:0] reg1_o,
  output logic [COL_W-1:0] regq_o
);

  typedef enum logic [1:0] { RET_NORMAL = 2'd0, RET_SRD = 2'd1, RET_QRD = 2'd2 } ret_e;

  typedef struct packed {
    logic   valid;
    ret_e   kind;
    logic   dst;
    scale_t scale;
  } ret_t;

  // Reset contents of the scaler table.
  localparam scale_t SCALE_ONE     = '{sop: 2'd0, m: 5'd0,  n: 5'd0};   // 1.0
  localparam scale_t SCALE_ETA     = '{sop: 2'd1, m: 5'd9,  n: 5'd7};   // 2^-7 + 2^-9
  localparam scale_t SCALE_ALPHA   = '{sop: 2'd2, m: 5'd3,  n: 5'd0};   // 1 - 2^-3
  localparam scale_t SCALE_ETABETA = '{sop: 2'd1, m: 5'd20, n: 5'd18};  // 2^-18 + 2^-20

  logic [COL_W-1:0] reg0, reg1, regq;
  scale_t           table_q [4];
  ret_t             ret_pipe [BG_RD_LAT];
  ret_t             ret_in;
  logic [COL_W-1:0] scaled;
  logic             tmp_we, q_we;
  logic [COL_W-1:0] tmp_result, q_result;
  logic [7:0]       col_age, alu_age;
  logic             is_col, is_alu;
  pim_op_e          alu_op;

  assign is_col = cmd_hit && (cmd.kind inside {CMD_RD, CMD_WR} ||
                              (cmd.kind == CMD_PIM && op_is_col(cmd.op)));
  assign is_alu = cmd_hit && cmd.kind == CMD_PIM && op_is_alu(cmd.op);
  assign alu_op = is_alu ? cmd.op : OP_NONE;

  pim_alu #(.Q_SHIFT(Q_SHIFT)) u_alu (
    .op(alu_op), .sd(cmd.sd), .pos(cmd.param),
    .reg0(reg0), .reg1(reg1), .regq(regq),
    .tmp_we(tmp_we), .tmp_result(tmp_result),
    .q_we(q_we), .q_result(q_result)
  );

  pim_scaler u_scaler (
    .din(bg_rdata), .scale(ret_pipe[BG_RD_LAT-1].scale), .dout(scaled)
  );

  // Column request to the bank group I/O gating.
  always_comb begin
    bg_req      = '0;
    bg_req.bank = cmd.ba;
    bg_req.col  = cmd.col;
    ret_in      = '0;
    if (cmd_hit) begin
      unique case (cmd.kind)
        CMD_RD: begin
          bg_req.rd = 1'b1;
          ret_in    = '{valid: 1'b1, kind: RET_NORMAL, dst: 1'b0, scale: '0};
        end
        CMD_WR: begin
          bg_req.wr    = 1'b1;
          bg_req.wdata = wdata;
        end
        CMD_PIM: begin
          unique case (cmd.op)
            OP_SRD: begin
              bg_req.rd = 1'b1;
              ret_in    = '{valid: 1'b1, kind: RET_SRD, dst: cmd.sd, scale: table_q[cmd.param]};
            end
            OP_QRD: begin
              bg_req.rd = 1'b1;
              ret_in    = '{valid: 1'b1, kind: RET_QRD, dst: 1'b0, scale: '0};
            end
            OP_WB: begin
              bg_req.wr    = 1'b1;
              bg_req.wdata = cmd.sd ? reg1 : reg0;
            end
            OP_QWR: begin
              bg_req.wr    = 1'b1;
              bg_req.wdata = regq;
            end
            default: ;
          endcase
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg0        <= '0;
      reg1        <= '0;
      regq        <= '0;
      rdata       <= '0;
      rdata_valid <= 1'b0;
      timing_err  <= 1'b0;
      col_age     <= '1;
      alu_age     <= '1;
      table_q[0]  <= SCALE_ONE;
      table_q[1]  <= SCALE_ETA;
      table_q[2]  <= SCALE_ALPHA;
      table_q[3]  <= SCALE_ETABETA;
      for (int i = 0; i < BG_RD_LAT; i++) ret_pipe[i] <= '0;
    end else begin
      // Return pipeline of column reads.
      ret_pipe[0] <= ret_in;
      for (int i = 1; i < BG_RD_LAT; i++) ret_pipe[i] <= ret_pipe[i-1];

      // Parallel arithmetic.
      if (tmp_we) begin
        if (cmd.sd) reg1 <= tmp_result;
        else        reg0 <= tmp_result;
      end
      if (q_we) regq <= q_result;

      // Data returning from the bank group.
      rdata_valid <= 1'b0;
      if (ret_pipe[BG_RD_LAT-1].valid) begin
        unique case (ret_pipe[BG_RD_LAT-1].kind)
          RET_NORMAL: begin
            rdata       <= bg_rdata;
            rdata_valid <= 1'b1;
          end
          RET_SRD: begin
            if (ret_pipe[BG_RD_LAT-1].dst) reg1 <= scaled;
            else                           reg0 <= scaled;
          end
          RET_QRD: regq <= bg_rdata;
          default: ;
        endcase
      end

      // Scaler table programming.
      if (cmd_hit && cmd.kind == CMD_MRS && cmd.mr == 3'd7)
        table_q[cmd.mr_data[13:12]] <= scale_t'(cmd.mr_data[11:0]);

      // Timing rules of the bank group.
      if (is_col) begin
        if (col_age < 8'(T_CCD_L)) timing_err <= 1'b1;
        col_age <= 8'd1;
      end else if (col_age != '1) begin
        col_age <= col_age + 8'd1;
      end
      if (is_alu) begin
        if (alu_age < 8'(T_PIM)) timing_err <= 1'b1;
        alu_age <= 8'd1;
      end else if (alu_age != '1) begin
        alu_age <= alu_age + 8'd1;
      end
    end
  end

  assign reg0_o = reg0;
  assign reg1_o = reg1;
  assign regq_o = regq;

  // A register may not be written by the arithmetic unit and by returning
  // read data in the same cycle; the controller's dependence rules exclude it.
  logic srd_ret, qrd_ret;
  assign srd_ret = ret_pipe[BG_RD_LAT-1].valid && ret_pipe[BG_RD_LAT-1].kind == RET_SRD;
  assign qrd_ret = ret_pipe[BG_RD_LAT-1].valid && ret_pipe[BG_RD_LAT-1].kind == RET_QRD;

  a_reg_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(srd_ret && tmp_we && ret_pipe[BG_RD_LAT-1].dst == cmd.sd))
    else $error("gradpim_unit: temporary register written by ALU and scaled read at once");
  a_regq_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(qrd_ret && q_we))
    else $error("gradpim_unit: RegQ written by ALU and Q.Reg read at once");

  initial begin
    assert (BG_RD_LAT >= 1 && BG_RD_LAT < T_CCD_L)
      else $error("gradpim_unit: BG_RD_LAT must be in 1..T_CCD_L-1");
  end

endmodule
