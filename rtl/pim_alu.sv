// pim_alu: parallel arithmetic unit of a GradPIM unit.
//
// Works element-wise on the 64-bit registers of one device (two 32-bit
// lanes, eight 8-bit lanes in the quantization register):
//   OP_ADD  Reg[dst] = Reg0 + Reg1
//   OP_SUB  Reg[dst] = Reg[other] - Reg[dst]
//   OP_DEQ  Reg[dst] = dequantize(RegQ quarter pos)
//   OP_QNT  RegQ quarter pos = quantize(Reg[src]), src given in sd
// Quarter p of RegQ is bits [16p+15:16p] and holds the two 8-bit values of
// one temporary register. Quantization is round-half-up of x / 2^Q_SHIFT,
// saturated to the 8-bit range; dequantization is sign extension and a left
// shift by Q_SHIFT. Additions wrap.
//
// The four operations and the quarter-position addressing are the paper's.
// The operand order of SUB (the destination is the subtrahend, which lets
// the momentum update run without negative scales), the fixed-point
// quantization formula, rounding, saturation and bit placement are this
// design's choices.
//
// Combinational; tmp_we/q_we say which register the caller must load with
// tmp_result/q_result at the end of the command cycle.
module pim_alu
  import gradpim_pkg::*;
#(
  parameter int Q_SHIFT = 16
) (
  input  pim_op_e          op,
  input  logic             sd,
  input  logic [1:0]       pos,
  input  logic [COL_W-1:0] reg0,
  input  logic [COL_W-1:0] reg1,
  input  logic [COL_W-1:0] regq,
  output logic             tmp_we,
  output logic [COL_W-1:0] tmp_result,
  output logic             q_we,
  output logic [COL_W-1:0] q_result
);

  function automatic logic [Q_W-1:0] quantize(logic signed [WORD_W-1:0] x);
    logic signed [WORD_W:0] r;
    r = ($signed({x[WORD_W-1], x}) + $signed((WORD_W+1)'(1) <<< (Q_SHIFT - 1))) >>> Q_SHIFT;
    if (r > $signed((WORD_W+1)'(127)))       return 8'sd127;
    else if (r < -$signed((WORD_W+1)'(128))) return 8'h80;
    else                                     return r[Q_W-1:0];
  endfunction

  function automatic logic [WORD_W-1:0] dequantize(logic signed [Q_W-1:0] q);
    logic signed [WORD_W-1:0] w;
    w = WORD_W'(q);
    return w <<< Q_SHIFT;
  endfunction

  logic [COL_W-1:0] src, dst_val, oth_val;

  always_comb begin
    src     = sd ? reg1 : reg0;
    dst_val = sd ? reg1 : reg0;
    oth_val = sd ? reg0 : reg1;
    tmp_we     = 1'b0;
    q_we       = 1'b0;
    tmp_result = '0;
    q_result   = regq;
    unique case (op)
      OP_ADD: begin
        tmp_we = 1'b1;
        for (int l = 0; l < LANES; l++)
          tmp_result[l*WORD_W +: WORD_W] = reg0[l*WORD_W +: WORD_W] + reg1[l*WORD_W +: WORD_W];
      end
      OP_SUB: begin
        tmp_we = 1'b1;
        for (int l = 0; l < LANES; l++)
          tmp_result[l*WORD_W +: WORD_W] = oth_val[l*WORD_W +: WORD_W] - dst_val[l*WORD_W +: WORD_W];
      end
      OP_DEQ: begin
        tmp_we = 1'b1;
        for (int l = 0; l < LANES; l++)
          tmp_result[l*WORD_W +: WORD_W] = dequantize(regq[pos*QPART_W + l*Q_W +: Q_W]);
      end
      OP_QNT: begin
        q_we = 1'b1;
        for (int l = 0; l < LANES; l++)
          q_result[pos*QPART_W + l*Q_W +: Q_W] = quantize(src[l*WORD_W +: WORD_W]);
      end
      default: ;
    endcase
  end

endmodule
