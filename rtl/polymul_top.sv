// polymul_top: fully pipelined multiplier of two polynomials in
// Z_Q[x]/(x^N + 1), Q = 1049089, N = 256, based on the number theoretic
// transform with negative wrapped convolution.
//
// Data path (five steps):
//   1. phi_mul  a and b are weighted: a_i * phi^i, b_i * phi^i
//   2. ntt      two forward NTTs, one per operand
//   3. pointwise_mul  element-wise product of the two transforms
//   4. intt     inverse NTT of the product
//   5. phi_mul  weights removed and 1/N applied: c_i = C_i * phi^-i / N
// Because phi is a primitive 2N-th root of unity, the result is the
// negacyclic product c = a * b mod (x^N + 1) with no extra reduction.
//
// Interface: a polynomial pair enters as N/2 consecutive clocks with in_valid
// high; in clock i the inputs are a0 = a_i, a1 = a_{i+N/2}, b0 = b_i,
// b1 = b_{i+N/2} (coefficients < Q). The product leaves in the same format:
// N/2 consecutive clocks with out_valid high, c0 = c_i, c1 = c_{i+N/2}.
// A new pair of polynomials may follow back-to-back, giving one product
// every N/2 = 128 clocks, or after at least N/4 = 64 idle clocks. Latency
// from the first input to the first output is 9 + 205 + 9 + 205 + 9 = 437
// clocks for N = 256. rst is synchronous and active high and clears only
// control state (counters and valid bits).
module polymul_top
  import ntt_pkg::*;
#(
  parameter int unsigned LOGN = 8           // log2 N, paper: N = 256
) (
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
  logic  wa_v, wb_v, ta_v, tb_v, pw_v, it_v;
  coef_t wa0, wa1, wb0, wb1, ta0, ta1, tb0, tb1, pw0, pw1, it0, it1;

  // step 1: weighting
  phi_mul #(.LOGN(LOGN), .INVERSE(1'b0)) u_phi_a (
    .clk(clk), .rst(rst), .in_valid(in_valid), .x0(a0), .x1(a1),
    .out_valid(wa_v), .y0(wa0), .y1(wa1));
  phi_mul #(.LOGN(LOGN), .INVERSE(1'b0)) u_phi_b (
    .clk(clk), .rst(rst), .in_valid(in_valid), .x0(b0), .x1(b1),
    .out_valid(wb_v), .y0(wb0), .y1(wb1));

  // step 2: forward NTTs
  ntt #(.LOGN(LOGN)) u_ntt_a (
    .clk(clk), .rst(rst), .in_valid(wa_v), .x0(wa0), .x1(wa1),
    .out_valid(ta_v), .y0(ta0), .y1(ta1));
  ntt #(.LOGN(LOGN)) u_ntt_b (
    .clk(clk), .rst(rst), .in_valid(wb_v), .x0(wb0), .x1(wb1),
    .out_valid(tb_v), .y0(tb0), .y1(tb1));

  // step 3: element-wise product
  pointwise_mul u_pw (
    .clk(clk), .rst(rst), .in_valid(ta_v),
    .a0(ta0), .a1(ta1), .b0(tb0), .b1(tb1),
    .out_valid(pw_v), .c0(pw0), .c1(pw1));

  // step 4: inverse NTT
  intt #(.LOGN(LOGN)) u_intt (
    .clk(clk), .rst(rst), .in_valid(pw_v), .x0(pw0), .x1(pw1),
    .out_valid(it_v), .y0(it0), .y1(it1));

  // step 5: weight removal and scaling
  phi_mul #(.LOGN(LOGN), .INVERSE(1'b1)) u_phi_c (
    .clk(clk), .rst(rst), .in_valid(it_v), .x0(it0), .x1(it1),
    .out_valid(out_valid), .y0(c0), .y1(c1));

  // the two forward transforms run in lockstep
  a_lockstep: assert property (@(posedge clk) disable iff (rst) ta_v == tb_v)
    else $error("polymul_top: forward NTT outputs out of step");

  logic unused;
  assign unused = wb_v;
endmodule
