// ntt: fully pipelined forward number theoretic transform of N coefficients,
// one pair of coefficients per clock.
//
// Input order: the pair (x_i, x_{i+N/2}) in clock i, i = 0 .. N/2-1, as the
// paper feeds its pipeline. Stage 1 combines each pair with twiddle factor 1;
// stages 2 .. LOGN are FIFO stages (see fifo_stage) whose butterfly partners
// are N/4, N/8, ..., 1 indices apart. The transform is the decimation-in-time
// Cooley-Tukey NTT with natural-order input and bit-reversed output: the
// value at array position p is X_brv(p) = sum_j x_j w^(j*brv(p)). Output
// order: the pair (position 2t, position 2t+1) in output clock t.
// Throughput: one polynomial every N/2 clocks when polynomials are sent
// back-to-back. Latency from first input pair to first output pair:
// 1 + sum over stages s = 2..LOGN of (N/2^s + 11) clocks, 205 for N = 256.
// A following polynomial may start back-to-back or after at least N/4 idle
// clocks. rst is synchronous and active high.
module ntt
  import ntt_pkg::*;
#(
  parameter int unsigned LOGN = 8           // log2 N, paper: N = 256
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
  logic  v  [LOGN+1];
  coef_t d0 [LOGN+1];
  coef_t d1 [LOGN+1];

  assign v[0]  = in_valid;
  assign d0[0] = x0;
  assign d1[0] = x1;

  // stage 1: twiddle factor 1, no storage
  ntt_stage1 u_st1 (
    .clk(clk), .rst(rst), .in_valid(v[0]), .ai(d0[0]), .aj(d1[0]),
    .out_valid(v[1]), .fs_o1(d0[1]), .fs_o2(d1[1])
  );

  // stages 2 .. LOGN: FIFO stages
  for (genvar s = 2; s <= LOGN; s++) begin : g_stage
    fifo_stage #(.LOGN(LOGN), .STAGE(s), .INVERSE(1'b0)) u_st (
      .clk(clk), .rst(rst), .in_valid(v[s-1]), .fs_o1(d0[s-1]), .fs_o2(d1[s-1]),
      .out_valid(v[s]), .ss_o1(d0[s]), .ss_o2(d1[s])
    );
  end

  assign out_valid = v[LOGN];
  assign y0        = d0[LOGN];
  assign y1        = d1[LOGN];
endmodule
