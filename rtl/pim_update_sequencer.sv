// pim_update_sequencer: expands one high-level command into GradPIM commands.
//
// Lives in the buffer device (or in the memory controller when the device is
// attached directly) and serves one bank group of one rank. A high-level
// command names a procedure and a range of full-precision columns (burst
// indices of the open rows); the sequencer emits, through a valid/ready
// handshake, the nine GradPIM commands per step of that procedure:
//
//   HL_UPDATE, per column j (momentum SGD with weight decay):
//     SRD g*eta->R1, SRD v*alpha->R0, SUB->R1 (alpha*v - eta*g),
//     SRD theta*eta*beta->R0, SUB->R0 (v_t), WB R0->v[j],
//     SRD theta->R1, ADD->R1 (theta+v_t), WB R1->theta[j]
//   HL_DEQUANT, per quantized column q (covers columns 4q..4q+3):
//     QRD Q(g)[q], DEQ 0->R0, DEQ 1->R1, WB R0->g[4q], DEQ 2->R0,
//     WB R1->g[4q+1], DEQ 3->R1, WB R0->g[4q+2], WB R1->g[4q+3]
//   HL_QUANT, per quantized column q:
//     SRD theta[4q]->R0, SRD theta[4q+1]->R1, QNT R0->0, SRD theta[4q+2]->R0,
//     QNT R1->1, SRD theta[4q+3]->R1, QNT R0->2, QNT R1->3, QWR->Q(theta)[q]
//
// The procedures and the bank placement (theta, v, g, quantized arrays in
// banks 0, 1, 2, 3, quantized arrays in the first quarter of their row) are
// the paper's. The command order inside a step, the scale ids and the
// high-level command format are this design's choices. For the two
// quantized procedures first and count must be multiples of four. The rows
// must already be open. Timing is left to pim_cmd_scheduler.
module pim_update_sequencer
  import gradpim_pkg::*;
#(
  parameter logic [1:0] BANK_THETA = 2'd0,
  parameter logic [1:0] BANK_V     = 2'd1,
  parameter logic [1:0] BANK_G     = 2'd2,
  parameter logic [1:0] BANK_Q     = 2'd3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     hl_valid,
  output logic     hl_ready,
  input  hl_cmd_t  hl,
  output logic     op_valid,
  input  logic     op_ready,
  output pim_uop_t op,
  output logic     busy
);

  localparam int STEPS = 9;

  logic              active;
  hl_kind_e          kind;
  logic [CIDX_W-1:0] cur;
  logic [CIDX_W:0]   rem;
  logic [3:0]        step;

  function automatic logic [COLA_W-1:0] cadr(logic [CIDX_W-1:0] j);
    return {j, 3'b000};
  endfunction

  function automatic pim_uop_t mk(pim_op_e o, logic [1:0] b, logic [CIDX_W-1:0] j,
                                  logic [1:0] prm, logic s);
    pim_uop_t u;
    u.op = o; u.bank = b; u.col = cadr(j); u.param = prm; u.sd = s;
    return u;
  endfunction

  function automatic pim_uop_t step_op(hl_kind_e k, logic [3:0] st, logic [CIDX_W-1:0] c);
    logic [CIDX_W-1:0] b4;
    pim_uop_t u;
    b4 = {c[CIDX_W-3:0], 2'b00};
    u  = '0;
    unique case (k)
      HL_UPDATE: unique case (st)
        4'd0: u = mk(OP_SRD, BANK_G,     c, SID_ETA,     1'b1);
        4'd1: u = mk(OP_SRD, BANK_V,     c, SID_ALPHA,   1'b0);
        4'd2: u = mk(OP_SUB, 2'd0,       '0, 2'd0,       1'b1);
        4'd3: u = mk(OP_SRD, BANK_THETA, c, SID_ETABETA, 1'b0);
        4'd4: u = mk(OP_SUB, 2'd0,       '0, 2'd0,       1'b0);
        4'd5: u = mk(OP_WB,  BANK_V,     c, 2'd0,        1'b0);
        4'd6: u = mk(OP_SRD, BANK_THETA, c, SID_ONE,     1'b1);
        4'd7: u = mk(OP_ADD, 2'd0,       '0, 2'd0,       1'b1);
        default: u = mk(OP_WB, BANK_THETA, c, 2'd0,      1'b1);
      endcase
      HL_DEQUANT: unique case (st)
        4'd0: u = mk(OP_QRD, BANK_Q, c,      2'd0, 1'b0);
        4'd1: u = mk(OP_DEQ, 2'd0,   '0,     2'd0, 1'b0);
        4'd2: u = mk(OP_DEQ, 2'd0,   '0,     2'd1, 1'b1);
        4'd3: u = mk(OP_WB,  BANK_G, b4,     2'd0, 1'b0);
        4'd4: u = mk(OP_DEQ, 2'd0,   '0,     2'd2, 1'b0);
        4'd5: u = mk(OP_WB,  BANK_G, b4 | 7'd1, 2'd0, 1'b1);
        4'd6: u = mk(OP_DEQ, 2'd0,   '0,     2'd3, 1'b1);
        4'd7: u = mk(OP_WB,  BANK_G, b4 | 7'd2, 2'd0, 1'b0);
        default: u = mk(OP_WB, BANK_G, b4 | 7'd3, 2'd0, 1'b1);
      endcase
      default: unique case (st)
        4'd0: u = mk(OP_SRD, BANK_THETA, b4,        SID_ONE, 1'b0);
        4'd1: u = mk(OP_SRD, BANK_THETA, b4 | 7'd1, SID_ONE, 1'b1);
        4'd2: u = mk(OP_QNT, 2'd0,       '0,        2'd0,    1'b0);
        4'd3: u = mk(OP_SRD, BANK_THETA, b4 | 7'd2, SID_ONE, 1'b0);
        4'd4: u = mk(OP_QNT, 2'd0,       '0,        2'd1,    1'b1);
        4'd5: u = mk(OP_SRD, BANK_THETA, b4 | 7'd3, SID_ONE, 1'b1);
        4'd6: u = mk(OP_QNT, 2'd0,       '0,        2'd2,    1'b0);
        4'd7: u = mk(OP_QNT, 2'd0,       '0,        2'd3,    1'b1);
        default: u = mk(OP_QWR, BANK_Q,  c,         2'd0,    1'b0);
      endcase
    endcase
    return u;
  endfunction

  assign hl_ready = !active;
  assign busy     = active;
  assign op_valid = active;
  assign op       = active ? step_op(kind, step, cur) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      kind   <= HL_UPDATE;
      cur    <= '0;
      rem    <= '0;
      step   <= '0;
    end else if (!active) begin
      if (hl_valid) begin
        kind <= hl.kind;
        step <= '0;
        if (hl.kind == HL_UPDATE) begin
          cur    <= hl.first;
          rem    <= hl.count;
          active <= (hl.count != '0);
        end else begin
          cur    <= {2'b00, hl.first[CIDX_W-1:2]};
          rem    <= {2'b00, hl.count[CIDX_W:2]};
          active <= (hl.count[CIDX_W:2] != '0);
        end
      end
    end else if (op_ready) begin
      if (step == 4'(STEPS - 1)) begin
        step <= '0;
        cur  <= cur + 1'b1;
        rem  <= rem - 1'b1;
        if (rem == 1) active <= 1'b0;
      end else begin
        step <= step + 4'd1;
      end
    end
  end

endmodule
