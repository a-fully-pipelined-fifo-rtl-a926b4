// mod_mul: modular multiplier (a * b) mod Q, the Karatsuba multiplier followed
// by the Barrett reduction, as used for weighting by phi^i, for the
// element-wise product and inside the butterfly.
// Interface: a, b (< Q) each clock; p = a*b mod Q appears LATENCY = 9 clocks
// later (6 for ka_mul, 3 for barrett_red). No valid, no reset.
module mod_mul
  import ntt_pkg::*;
(
  input  logic  clk,
  input  coef_t a,
  input  coef_t b,
  output coef_t p
);
  logic [2*CW-1:0] prod;

  ka_mul #(.AW(CW)) u_mul (.clk(clk), .a(a), .b(b), .p(prod));
  barrett_red       u_red (.clk(clk), .i(prod), .r(p));
endmodule
