// tb_pim_scaler: random words and scale settings against a 64-bit reference.
//
// The expected value of each lane is floor(x / 2^n) +- floor(x / 2^m),
// computed with 64-bit integer division rounding toward minus infinity, and
// wrapped to 32 bits. Also checks two fixed examples: scale 1.0 keeps the
// word and 1 - 2^-3 gives 0.875 of a round number.
module tb_pim_scaler;
  import gradpim_pkg::*;

  logic [COL_W-1:0] din, dout;
  scale_t scale;
  int checks = 0, failures = 0;

  pim_scaler dut (.din(din), .scale(scale), .dout(dout));

  function automatic longint fdiv(longint x, int sh);
    longint d, q;
    d = longint'(1) << sh;
    q = x / d;
    if ((x % d) != 0 && x < 0) q = q - 1;
    return q;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      din = {$urandom, $urandom};
      scale.n = 5'($urandom); scale.m = 5'($urandom); scale.sop = 2'($urandom);
      #1;
      for (int l = 0; l < LANES; l++) begin
        longint x, e;
        logic [31:0] exp32;
        x = longint'($signed(din[l*32 +: 32]));
        case (scale.sop)
          2'd0: e = fdiv(x, scale.n);
          2'd1: e = fdiv(x, scale.n) + fdiv(x, scale.m);
          2'd2: e = fdiv(x, scale.n) - fdiv(x, scale.m);
          default: e = 0;
        endcase
        exp32 = e[31:0];
        checks++;
        if (dout[l*32 +: 32] !== exp32) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d n=%0d m=%0d sop=%0d got %0d exp %0d",
                                      x, scale.n, scale.m, scale.sop,
                                      $signed(dout[l*32 +: 32]), $signed(exp32));
        end
      end
    end
    din = {32'd800, -32'sd800};
    scale = '{sop: 2'd2, m: 5'd3, n: 5'd0};
    #1; checks++;
    if (dout !== {32'd700, -32'sd700}) begin failures++; $display("FAIL 0.875"); end
    scale = '{sop: 2'd0, m: 5'd0, n: 5'd0};
    #1; checks++;
    if (dout !== din) begin failures++; $display("FAIL 1.0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
