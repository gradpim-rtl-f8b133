// pim_scaler: shift-and-add scaler between the bank group I/O and the registers.
//
// Every 32-bit word of a column is multiplied by a hyperparameter that has
// been approximated as 2^-n, 2^-n + 2^-m or 2^-n - 2^-m (sop = 0, 1, 2;
// sop = 3 gives zero). Each lane is two arithmetic right shifters and one
// adder/subtractor, so the words are two's complement fixed point; the shift
// keeps the binary point, so the format's fraction width does not matter
// here.
//
// The 2^n +- 2^m form and the shift-add structure are the paper's; the
// restriction to right shifts of 0..31 (scales between 0 and 2) and the
// fixed-point reading of the words are this design's choices.
//
// Combinational; the result is captured by the destination register.
module pim_scaler
  import gradpim_pkg::*;
#(
  parameter int LANES_P = LANES,
  parameter int WORD_P  = WORD_W
) (
  input  logic [LANES_P*WORD_P-1:0] din,
  input  scale_t                    scale,
  output logic [LANES_P*WORD_P-1:0] dout
);

  always_comb begin
    for (int l = 0; l < LANES_P; l++) begin
      logic signed [WORD_P-1:0] x, a, b, y;
      x = din[l*WORD_P +: WORD_P];
      a = x >>> scale.n;
      b = x >>> scale.m;
      unique case (scale.sop)
        2'd0:    y = a;
        2'd1:    y = a + b;
        2'd2:    y = a - b;
        default: y = '0;
      endcase
      dout[l*WORD_P +: WORD_P] = y;
    end
  end

endmodule
