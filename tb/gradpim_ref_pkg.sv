// gradpim_ref_pkg: reference arithmetic for the GradPIM testbenches.
//
// Written with 64-bit integers and division rather than shifts, so it does
// not share code with the RTL: scaling by 2^-n +- 2^-m (each term rounded
// toward minus infinity), 8-bit quantization (round half up, saturate),
// dequantization, and one lane of the momentum-SGD update with weight decay
// using the default scaler table (eta = 2^-7 + 2^-9, alpha = 1 - 2^-3,
// eta*beta = 2^-18 + 2^-20):
//   v'     = alpha*v - eta*g - eta*beta*theta
//   theta' = theta + v'
package gradpim_ref_pkg;

  localparam int QS = 16;

  function automatic longint fdiv(longint x, int sh);
    longint d, q;
    d = longint'(1) << sh;
    q = x / d;
    if ((x % d) != 0 && x < 0) q = q - 1;
    return q;
  endfunction

  function automatic logic [31:0] scale(logic [31:0] w, int n, int m, int sop);
    longint x, e;
    x = longint'($signed(w));
    case (sop)
      0: e = fdiv(x, n);
      1: e = fdiv(x, n) + fdiv(x, m);
      2: e = fdiv(x, n) - fdiv(x, m);
      default: e = 0;
    endcase
    return e[31:0];
  endfunction

  function automatic logic [7:0] quant(logic [31:0] w);
    longint q;
    q = fdiv(longint'($signed(w)) + (longint'(1) << (QS - 1)), QS);
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q[7:0];
  endfunction

  function automatic logic [31:0] dequant(logic [7:0] q);
    longint e;
    e = longint'($signed(q)) * (longint'(1) << QS);
    return e[31:0];
  endfunction

  // One 32-bit lane of the update; returns {theta', v'}.
  function automatic logic [63:0] update(logic [31:0] theta, logic [31:0] v, logic [31:0] g);
    logic [31:0] eg, av, ebt, vn, tn;
    eg  = scale(g, 7, 9, 1);
    av  = scale(v, 0, 3, 2);
    ebt = scale(theta, 18, 20, 1);
    vn  = av - eg - ebt;
    tn  = theta + vn;
    return {tn, vn};
  endfunction

  // Whole 64-bit column (two lanes).
  function automatic logic [127:0] update_col(logic [63:0] th, logic [63:0] v, logic [63:0] g);
    logic [63:0] r0, r1;
    r0 = update(th[31:0], v[31:0], g[31:0]);
    r1 = update(th[63:32], v[63:32], g[63:32]);
    return {r1[63:32], r0[63:32], r1[31:0], r0[31:0]};   // {theta', v'}
  endfunction

  function automatic logic [63:0] dequant_quarter(logic [63:0] qcol, int p);
    return {dequant(qcol[p*16 + 8 +: 8]), dequant(qcol[p*16 +: 8])};
  endfunction

  function automatic logic [15:0] quant_col(logic [63:0] th);
    return {quant(th[63:32]), quant(th[31:0])};
  endfunction

endpackage
