// barrett_red: reduction of a 42-bit product I modulo Q = 1049089.
//
// Barrett with k = 40 and u = 2^20 - 2^9 (the paper's choice, one subtractor
// cheaper than the minimal u = 2^20 - 2^9 - 1). The quotient estimate is
//   q = floor((I - floor(I / 2^11)) / 2^20)          (r1 = I - I[41:11], q = r1[40:20])
// and the remainder I - q*Q is formed modulo 2^23 as
//   I[22:0] - {q[13:0], 9'b0} - (q + {q[2:0], 20'b0}).
// Clock stages (three registers), as in the paper's reduction figure:
//   stage 1: r0 <= I[22:0], r1 <= I - I[41:11]
//   stage 2: r3 <= r0 - {r1[33:20],9'b0} - (r1[40:20] + {r1[22:20],20'b0})
//   stage 3: r  <= (r3 < 0) ? r3 + Q : r3
// Two points depart from the paper's text, both needed for a correct result:
// * The text states r1[40] is always 0 (r1_max = 0xDF194744D7) and replaces
//   q + {q[2:0],20'b0} by the concatenation {r1[22:20], r1[39:20]}. In fact
//   (Q-1)^2 - (Q-1)^2/2^11 = 0x1001FFBFF80 has bit 40 set, so bit 40 is kept
//   and the two terms are added.
// * Because u/2^40 is slightly above 1/Q, the estimate can exceed the true
//   quotient by one and r3 lies in [-Q, Q). The final stage therefore adds Q
//   when r3 is negative, as the figure's "+M" adder and mux show; the text's
//   "subtract M if >= M" never applies.
// Interface: i (42 bits, i < Q^2) each clock; r (21 bits, r < Q) LATENCY = 3
// clocks later. No valid, no reset.
module barrett_red
  import ntt_pkg::*;
(
  input  logic        clk,
  input  logic [41:0] i,
  output coef_t       r
);
  logic        [22:0] r0;
  logic        [40:0] r1;      // I - I/2^11 < 2^41; bits 19:0 (the fraction) are not needed
  logic signed [22:0] r3;
  logic        [22:0] qsum;
  logic        [22:0] diff;

  assign qsum = 23'(r1[40:20]) + {r1[22:20], 20'b0};
  assign diff = r0 - {r1[33:20], 9'b0} - qsum;

  always_ff @(posedge clk) begin
    r0 <= i[22:0];
    r1 <= 41'(i - 42'(i[41:11]));
    r3 <= signed'(diff);
    if (r3 < 0) r <= coef_t'(r3 + 23'(Q));
    else        r <= coef_t'(r3);
  end
endmodule
