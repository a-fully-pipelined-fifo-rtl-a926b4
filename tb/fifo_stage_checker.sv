// fifo_stage_checker: drives one fifo_stage configuration with three random
// polynomials (two back-to-back, then one after an idle gap of D+5 clocks) in
// the pair order the previous stage produces, and compares every output pair
// with one butterfly stage applied to the whole polynomial (tb_ref_pkg).
// Also checked: the first output pair of a polynomial appears exactly
// D + 11 clocks after its first input pair, and each polynomial's N/2 output
// pairs leave on consecutive clocks.
module fifo_stage_checker
  import ntt_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned LOGN    = 8,
  parameter int unsigned STAGE   = 2,
  parameter bit          INVERSE = 1'b0
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int unsigned N      = 1 << LOGN;
  localparam int unsigned LOGD   = INVERSE ? STAGE - 2 : LOGN - STAGE;
  localparam int unsigned D      = 1 << LOGD;
  localparam int unsigned POS_IN = INVERSE ? LOGD : LOGD + 1;
  localparam int unsigned DIN    = 1 << POS_IN;
  localparam int unsigned POS_OU = INVERSE ? LOGD + 1 : LOGD;
  localparam int unsigned DOUT   = 1 << POS_OU;
  localparam int unsigned NPOLY  = 3;
  localparam int unsigned LAT    = D + 11;

  logic  in_valid, out_valid;
  coef_t fs_o1, fs_o2, ss_o1, ss_o2;
  vec_t  xin [NPOLY];
  vec_t  yex [NPOLY];
  longint cycle;
  longint start_cycle [NPOLY];

  fifo_stage #(.LOGN(LOGN), .STAGE(STAGE), .INVERSE(INVERSE)) dut (
    .clk(clk), .rst(rst), .in_valid(in_valid), .fs_o1(fs_o1), .fs_o2(fs_o2),
    .out_valid(out_valid), .ss_o1(ss_o1), .ss_o2(ss_o2));

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int p = 0; p < NPOLY; p++) begin
      for (int i = 0; i < N; i++) xin[p][i] = $urandom_range(Q - 1);
      yex[p] = stage_ref(xin[p], LOGN, STAGE, INVERSE);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) cycle <= 0;
    else     cycle <= cycle + 1;
  end

  // driver
  initial begin
    in_valid = 0; fs_o1 = 0; fs_o2 = 0;
    @(negedge rst);
    @(posedge clk); #1;
    for (int p = 0; p < NPOLY; p++) begin
      if (p == 2) begin
        in_valid = 0;
        repeat (D + 5) @(posedge clk);
        #1;
      end
      start_cycle[p] = cycle;
      for (int t = 0; t < N / 2; t++) begin
        int unsigned k;
        k = insert0(t, POS_IN);
        in_valid = 1;
        fs_o1 = coef_t'(xin[p][k]);
        fs_o2 = coef_t'(xin[p][k + DIN]);
        @(posedge clk); #1;
      end
    end
    in_valid = 0;
  end

  // monitor
  initial begin
    int p, c;
    longint last;
    p = 0; c = 0; last = 0;
    while (p < NPOLY) begin
      @(posedge clk); #1;
      if (out_valid) begin
        int unsigned k;
        k = insert0(c, POS_OU);
        checks++;
        if (64'(ss_o1) != yex[p][k] || 64'(ss_o2) != yex[p][k + DOUT]) begin
          failures++;
          if (failures < 6)
            $display("stage %0d inv %0b poly %0d pair %0d: got %0d %0d expected %0d %0d",
                     STAGE, INVERSE, p, c, ss_o1, ss_o2, yex[p][k], yex[p][k + DOUT]);
        end
        if (c == 0) begin
          checks++;
          if (cycle - start_cycle[p] != LAT) begin
            failures++;
            $display("stage %0d inv %0b poly %0d: latency %0d expected %0d",
                     STAGE, INVERSE, p, cycle - start_cycle[p], LAT);
          end
        end else begin
          checks++;
          if (cycle != last + 1) begin
            failures++;
            $display("stage %0d inv %0b poly %0d: gap inside output burst", STAGE, INVERSE, p);
          end
        end
        last = cycle;
        c++;
        if (c == N / 2) begin c = 0; p++; end
      end
    end
    done = 1;
  end
endmodule
