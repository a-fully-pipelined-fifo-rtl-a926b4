// phi_mul: weighting of polynomial coefficients by powers of phi (step 1 of
// the negative-wrapped-convolution multiplication) or removal of the weights
// (step 5), two coefficients per clock.
//
// The polynomial enters as N/2 pairs (x_i, x_{i+N/2}), i = 0 .. N/2-1, one per
// clock. A ROM holds T[j] for j = 0 .. N-1 and a read address that starts at
// 0 and increments with every accepted pair selects T[i] and T[i+N/2]; each
// coefficient is multiplied by its entry in a mod_mul (Karatsuba multiplier
// plus Barrett reduction).
//   INVERSE = 0 : T[j] = phi^j mod Q                    (y = x * phi^j)
//   INVERSE = 1 : T[j] = N^-1 * phi^-j mod Q            (y = x * phi^-j / N)
// Folding the 1/N scale of the inverse NTT into the unweighting table is this
// design's choice; the paper says only that the results are scaled and
// multiplied by phi^-i. The paper's datapath handles one pair per clock, so
// two multipliers and a two-port ROM are used per polynomial.
// Interface: in_valid with x0/x1; out_valid with y0/y1 LATENCY = 9 clocks
// later. The address wraps after N/2 pairs, so polynomials must enter whole.
// rst (synchronous, active high) clears the address and the valid pipeline.
module phi_mul
  import ntt_pkg::*;
#(
  parameter int unsigned LOGN    = 8,       // log2 N, paper: N = 256
  parameter bit          INVERSE = 1'b0     // 0: weight by phi^i, 1: unweight
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  coef_t x0,
  input  coef_t x1,
  output logic  out_valid,
  output coef_t y0,
  output coef_t y1
);
  localparam int unsigned LATENCY = 9;
  localparam table_t      ROM     = phi_table(LOGN, INVERSE);

  logic [LOGN-2:0]    addr;
  logic [LATENCY-1:0] vld;
  coef_t              t0, t1;

  assign t0 = ROM[MAX_LOGN'({1'b0, addr})];
  assign t1 = ROM[MAX_LOGN'({1'b1, addr})];

  always_ff @(posedge clk) begin
    if (rst) begin
      addr <= '0;
      vld  <= '0;
    end else begin
      if (in_valid) addr <= addr + 1'b1;
      vld <= {vld[LATENCY-2:0], in_valid};
    end
  end

  mod_mul u_m0 (.clk(clk), .a(x0), .b(t0), .p(y0));
  mod_mul u_m1 (.clk(clk), .a(x1), .b(t1), .p(y1));

  assign out_valid = vld[LATENCY-1];
endmodule
