// ntt_stage1: butterfly with twiddle factor 1, used as the first forward NTT
// stage and the first inverse NTT stage.
//
//   fs_o1 = (ai + aj) mod Q,   fs_o2 = (ai - aj) mod Q
//
// With w = 1 the butterfly needs no multiplier: one adder and one subtractor,
// each followed by a conditional correction (subtract Q when the sum is >= Q,
// add Q when the difference is negative) and a mux, as in the paper's stage-1
// figure. Both operands of a pair arrive in the same clock, so the stage needs
// no storage. The output register (one clock of latency) is this design's
// choice; the figure shows the stage as combinational.
// Interface: in_valid/ai/aj each clock; out_valid/fs_o1/fs_o2 one clock later.
// rst (synchronous, active high) clears out_valid.
module ntt_stage1
  import ntt_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  coef_t ai,
  input  coef_t aj,
  output logic  out_valid,
  output coef_t fs_o1,
  output coef_t fs_o2
);
  logic        [21:0] s;
  logic signed [22:0] d;

  assign s = 22'(ai) + 22'(aj);
  assign d = signed'(23'(ai)) - signed'(23'(aj));

  always_ff @(posedge clk) begin
    fs_o1 <= (s >= 22'(Q)) ? coef_t'(s - 22'(Q)) : coef_t'(s);
    fs_o2 <= (d < 0)       ? coef_t'(d + 23'(Q)) : coef_t'(d);
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
  end
endmodule
