// butterfly: fully pipelined Cooley-Tukey butterfly modulo Q.
//
//   o1 = (aj + w*ai) mod Q,   o2 = (aj - w*ai) mod Q
//
// ai is the operand multiplied by the twiddle factor w; aj travels alongside
// through delay registers. Following the paper's butterfly figure, w*ai is
// formed by the Karatsuba multiplier and reduced by the Barrett circuit, then
// one clock adds aj (r22) and subtracts (r23), and one clock prepares both the
// raw and the corrected value of each (r24..r27); the final 2:1 muxes pick the
// corrected value when the sum is >= Q or the difference is negative.
// Departures: the Barrett stage here includes its final "+Q if negative"
// correction (one more clock than the butterfly figure shows), because without
// it the product lies in [-Q, Q) and a single correction after the add/sub
// would not suffice. The paper's text says aj is subtracted from the product;
// this design computes aj - w*ai, the sign a forward/inverse NTT needs.
// Interface: in_valid/ai/aj/w accepted every clock; out_valid/o1/o2 appear
// LATENCY = 11 clocks later. rst (synchronous, active high) clears the valid
// pipeline only.
module butterfly
  import ntt_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  coef_t ai,
  input  coef_t aj,
  input  coef_t w,
  output logic  out_valid,
  output coef_t o1,
  output coef_t o2
);
  localparam int unsigned MUL_LAT = 9;
  localparam int unsigned LATENCY = MUL_LAT + 2;

  coef_t              prod;
  coef_t              aj_d [MUL_LAT];      // r28.. in the figure
  logic        [21:0] r22, r25;
  logic signed [22:0] r23, r27;
  coef_t              r24, r26;
  logic [LATENCY-1:0] vld;

  mod_mul u_mul (.clk(clk), .a(ai), .b(w), .p(prod));

  always_ff @(posedge clk) begin
    aj_d[0] <= aj;
    for (int k = 1; k < MUL_LAT; k++) aj_d[k] <= aj_d[k-1];
    r22 <= 22'(prod) + 22'(aj_d[MUL_LAT-1]);
    r23 <= signed'(23'(aj_d[MUL_LAT-1])) - signed'(23'(prod));
    r24 <= coef_t'(r22 - 22'(Q));
    r25 <= r22;
    r26 <= coef_t'(r23 + 23'(Q));
    r27 <= r23;
  end

  always_ff @(posedge clk) begin
    if (rst) vld <= '0;
    else     vld <= {vld[LATENCY-2:0], in_valid};
  end

  assign o1        = (r25 >= 22'(Q)) ? r24 : coef_t'(r25);
  assign o2        = (r27 < 0)       ? r26 : coef_t'(r27);
  assign out_valid = vld[LATENCY-1];
endmodule
