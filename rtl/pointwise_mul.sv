// pointwise_mul: element-wise modular product of two NTT-domain polynomials
// (step 3), two coefficient pairs per clock.
//
// Both forward NTTs deliver their outputs in the same order and in lockstep,
// so coefficient k of one is multiplied by coefficient k of the other with no
// reordering. Each product uses the same Karatsuba multiplier and Barrett
// reduction as the weighting step, as the paper states.
// Interface: in_valid with (a0, a1) and (b0, b1); out_valid with
// c0 = a0*b0 mod Q, c1 = a1*b1 mod Q LATENCY = 9 clocks later. rst
// (synchronous, active high) clears the valid pipeline.
module pointwise_mul
  import ntt_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  coef_t a0,
  input  coef_t a1,
  input  coef_t b0,
  input  coef_t b1,
  output logic  out_valid,
  output coef_t c0,
  output coef_t c1
);
  localparam int unsigned LATENCY = 9;
  logic [LATENCY-1:0] vld;

  always_ff @(posedge clk) begin
    if (rst) vld <= '0;
    else     vld <= {vld[LATENCY-2:0], in_valid};
  end

  mod_mul u_m0 (.clk(clk), .a(a0), .b(b0), .p(c0));
  mod_mul u_m1 (.clk(clk), .a(a1), .b(b1), .p(c1));

  assign out_valid = vld[LATENCY-1];
endmodule
