// intt: fully pipelined inverse number theoretic transform (without the 1/N
// scale, which the unweighting step applies), one pair per clock.
//
// Input order: bit-reversed, exactly as the forward ntt produces it, the pair
// (position 2t, position 2t+1) in clock t. Stage 1 combines the two members of
// each pair with twiddle factor 1; stages 2 .. LOGN are FIFO stages holding
// 1, 2, ..., N/4 clocks (see fifo_stage) whose butterfly partners are 2, 4,
// ..., N/2 indices apart, with twiddle factors w^-j. This is the
// decimation-in-time Cooley-Tukey transform from bit-reversed to natural
// order, so the output is N * x for the x the forward ntt started from.
// Output order: the pair (x_i, x_{i+N/2}) in output clock i, the same format
// as the forward input. The paper gives the inverse stages only in outline
// (first stage like the w = 1 stage, later stages holding data for 2 .. 64
// clocks, last stage with 128 different twiddle factors); the depths and
// twiddle order here are this design's, chosen so that the same FIFO stage
// serves both directions.
// Throughput: one polynomial every N/2 clocks. Latency from first input pair
// to first output pair: 1 + sum over s = 2..LOGN of (2^(s-2) + 11), 205 for
// N = 256. rst is synchronous and active high.
module intt
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
    fifo_stage #(.LOGN(LOGN), .STAGE(s), .INVERSE(1'b1)) u_st (
      .clk(clk), .rst(rst), .in_valid(v[s-1]), .fs_o1(d0[s-1]), .fs_o2(d1[s-1]),
      .out_valid(v[s]), .ss_o1(d0[s]), .ss_o2(d1[s])
    );
  end

  assign out_valid = v[LOGN];
  assign y0        = d0[LOGN];
  assign y1        = d1[LOGN];
endmodule
