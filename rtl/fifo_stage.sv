// fifo_stage: one FIFO-based pipelined NTT stage (forward stages 2..LOGN and
// inverse stages 2..LOGN).
//
// Each clock the stage receives one pair of coefficients (fs_o1, fs_o2) from
// the previous stage and sends one re-paired couple to its butterfly. In a
// forward stage the incoming pairs are 2*D indices apart and the butterfly
// pairs D apart; in an inverse stage incoming pairs are D apart and butterfly
// pairs 2*D apart. The same re-pairing serves both: within each window of 2*D
// input clocks, with (A_j, B_j) arriving in the first half and (C_j, E_j) in
// the second, the butterfly receives (A_j, C_j) and then (B_j, E_j).
// Two shift registers of depth D ("block I" and "block II") hold the
// coefficients that wait for their partner. A counter of period 2*D drives sel, which is 1 in the first D
// clocks of each window and 0 in the second D:
//   sel = 1: block I  <= fs_o1, block II <= fs_o2;
//            butterfly gets (ai = block I out, aj = block II out), the pair
//            left over from the previous window
//   sel = 0: block I  <= fs_o2, block II holds;
//            butterfly gets (ai = fs_o1, aj = block I out)
// This is the paper's truth table for the FIFO stage (counter < 64: sel 1,
// 64..127: sel 0 and (fs_o1, r64), 128..191: sel 1 and (r64, r128)), with the
// third phase of one polynomial overlapping the first phase of the next.
// Block II's clock gate (clk AND sel in the paper) is written here as a clock
// enable, the usual practice for an FPGA. Coefficient aj of the butterfly is
// the pair member with the lower index; ai is multiplied by the twiddle.
//
// Hold depth D and twiddle factors:
//   forward stage s : D = N/2^s (64, 32, ..., 1 for N = 256); the pair with
//                     output count c uses w^(bitrev(c>>log2(D), s-1)*N/2^s)
//   inverse stage s : D = 2^(s-2) (1, 2, ..., 64); pair count c uses
//                     w^(-(c mod 2^(s-1))*N/2^s)
// The forward depths follow the paper (64 clocks in stage 2, 32 in stage 3,
// halving each stage). The inverse depths are this design's: they are the
// ones a natural-order output needs (the paper gives 2, 4, ..., 64 for
// inverse stages 2..7 and none for stage 8). The twiddle factors are kept in a
// constant table computed at elaboration (see ntt_pkg); the paper uses
// registers and muxes for stages 2 and 3 and a memory for later stages, which
// a synthesis tool derives from the same table.
//
// Flow control: a polynomial is N/2 pairs on consecutive clocks; the next one
// may follow back-to-back or after an idle gap of at least D clocks (so that
// the last D pairs can be flushed by letting the counter run). The stage
// emits each input pair's partner pair D clocks later, plus the butterfly's
// 11-clock latency. rst is synchronous and active high.
module fifo_stage
  import ntt_pkg::*;
#(
  parameter int unsigned LOGN    = 8,       // log2 N, paper: N = 256
  parameter int unsigned STAGE   = 2,       // stage number, 2..LOGN
  parameter bit          INVERSE = 1'b0     // 0: forward NTT, 1: inverse NTT
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  coef_t fs_o1,
  input  coef_t fs_o2,
  output logic  out_valid,
  output coef_t ss_o1,
  output coef_t ss_o2
);
  localparam int unsigned LOGD  = INVERSE ? STAGE - 2 : LOGN - STAGE;
  localparam int unsigned D     = 1 << LOGD;
  localparam int unsigned CNTW  = LOGD + 1;
  localparam int unsigned PW    = LOGN - 1;            // pair counter width
  localparam table_t      TW    = twiddle_table(LOGN, STAGE, INVERSE);

  logic [CNTW-1:0] cnt;
  logic            pend;      // block I/II hold a pair left from the last window
  logic            sel, run;
  coef_t           x1;
  coef_t           blk1 [D];  // block I
  coef_t           blk2 [D];  // block II
  coef_t           but_in_1, but_in_2, w;
  logic            but_valid;
  logic [PW-1:0]   pcnt;      // butterfly input pair count within a polynomial
  logic [PW-1:0]   tidx;

  assign sel = ~cnt[CNTW-1];
  assign run = in_valid | (pend & sel);
  assign x1  = sel ? fs_o1 : fs_o2;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt  <= '0;
      pend <= 1'b0;
    end else if (run) begin
      // a flush with no new input returns to the idle state cnt = 0
      if (!in_valid && cnt == CNTW'(D - 1)) cnt <= '0;
      else                                  cnt <= cnt + 1'b1;
      if (cnt == CNTW'(2*D - 1))    pend <= 1'b1;
      else if (cnt == CNTW'(D - 1)) pend <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (run) begin
      blk1[0] <= x1;
      for (int k = 1; k < D; k++) blk1[k] <= blk1[k-1];
    end
    if (run && sel) begin
      blk2[0] <= fs_o2;
      for (int k = 1; k < D; k++) blk2[k] <= blk2[k-1];
    end
  end

  always_comb begin
    if (sel) begin
      but_in_1  = blk1[D-1];
      but_in_2  = blk2[D-1];
      but_valid = pend;
    end else begin
      but_in_1  = fs_o1;
      but_in_2  = blk1[D-1];
      but_valid = in_valid;
    end
  end

  // twiddle selection from the pair count
  always_ff @(posedge clk) begin
    if (rst)            pcnt <= '0;
    else if (but_valid) pcnt <= pcnt + 1'b1;
  end

  if (INVERSE) begin : g_inv_idx
    assign tidx = pcnt & PW'((1 << (STAGE - 1)) - 1);
  end else begin : g_fwd_idx
    assign tidx = pcnt >> LOGD;
  end
  assign w = TW[MAX_LOGN'(tidx)];

  butterfly u_bf (
    .clk(clk), .rst(rst), .in_valid(but_valid),
    .ai(but_in_1), .aj(but_in_2), .w(w),
    .out_valid(out_valid), .o1(ss_o1), .o2(ss_o2)
  );

  // A window's second half must arrive without gaps.
  a_no_gap_in_window: assert property (@(posedge clk) disable iff (rst)
    !sel |-> in_valid)
    else $error("fifo_stage %0d: input gap in the second half of a window", STAGE);
  // A new burst must start on a window boundary.
  a_aligned_start: assert property (@(posedge clk) disable iff (rst)
    (in_valid && !$past(in_valid) && !$past(rst)) |-> cnt == '0)
    else $error("fifo_stage %0d: polynomial start not aligned to a window", STAGE);
endmodule
