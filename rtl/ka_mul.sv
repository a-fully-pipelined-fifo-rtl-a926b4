// ka_mul: pipelined 21 x 21-bit Karatsuba multiplier, product 42 bits.
//
// The operands are split at bit 11 into a low part (11 bits) and a high part
// (10 bits). Three narrow products are formed, LL = aL*bL, HH = aH*bH and
// (aL+aH)*(bL+bH); the middle term is (aL+aH)*(bL+bH) - LL - HH and the result
// is HH*2^22 + mid*2^11 + LL. The register names r0..r18, the split widths
// (11/10), the 12-bit sums, and the placement of each operation in one of six
// clock stages follow the paper's multiplier data-flow graph:
//   stage 1: r0 <= a, r1 <= b
//   stage 2: r2..r5 <= aL, aH, bL, bH
//   stage 3: r6 <= aL*bL, r7/r8 <= aH/bH, r9 <= aL+aH, r10 <= bL+bH
//   stage 4: r11 <= r6, r12 <= aH*bH, r13/r14 <= r9/r10
//   stage 5: r15 <= LL, r16 <= HH, r17 <= r13*r14 - (LL + HH)
//   stage 6: r18 <= HH<<22 + mid<<11 + LL
// Interface: operands a, b each clock; product p appears LATENCY = 6 clocks
// later. There is no stall and no valid; callers delay their own valid bit.
// No reset: the pipeline holds only data.
module ka_mul #(
  parameter int unsigned AW = 21            // operand width (paper: 21)
) (
  input  logic            clk,
  input  logic [AW-1:0]   a,
  input  logic [AW-1:0]   b,
  output logic [2*AW-1:0] p
);
  localparam int unsigned LW = (AW + 1) / 2;   // low part width (11)
  localparam int unsigned HW = AW - LW;        // high part width (10)
  localparam int unsigned SW = LW + 1;         // width of aL + aH (12)

  logic [AW-1:0]   r0, r1;
  logic [LW-1:0]   r2, r4;
  logic [HW-1:0]   r3, r5, r7, r8;
  logic [2*LW-1:0] r6, r11, r15;
  logic [SW-1:0]   r9, r10, r13, r14;
  logic [2*HW-1:0] r12, r16;
  logic [2*LW:0]   r17;                        // middle term, fits 2*LW+1 bits
  logic [2*AW-1:0] r18;

  // (aL+aH)(bL+bH) - LL - HH = aL*bH + aH*bL < 2^(2*LW+1)
  logic [2*LW:0] mid;
  assign mid = (2*LW+1)'(r13 * r14 - ({1'b0, r11} + {{(2*LW-2*HW+1){1'b0}}, r12}));

  always_ff @(posedge clk) begin
    // stage 1
    r0  <= a;
    r1  <= b;
    // stage 2
    r2  <= r0[LW-1:0];
    r3  <= r0[AW-1:LW];
    r4  <= r1[LW-1:0];
    r5  <= r1[AW-1:LW];
    // stage 3
    r6  <= r2 * r4;
    r7  <= r3;
    r8  <= r5;
    r9  <= SW'(r2) + SW'(r3);
    r10 <= SW'(r4) + SW'(r5);
    // stage 4
    r11 <= r6;
    r12 <= r7 * r8;
    r13 <= r9;
    r14 <= r10;
    // stage 5
    r15 <= r11;
    r16 <= r12;
    r17 <= mid;
    // stage 6
    r18 <= ((2*AW)'(r16) << (2*LW)) + ((2*AW)'(r17) << LW) + (2*AW)'(r15);
  end

  assign p = r18;
endmodule
