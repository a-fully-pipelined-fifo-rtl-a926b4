// polymul_checker: multiplies three random polynomial pairs (two
// back-to-back, one after an idle gap of N/4 + 3 clocks) in a polymul_top of
// size N = 2^LOGN and compares every output coefficient with a schoolbook
// product mod (x^N + 1). Also checks that back-to-back products leave N/2
// clocks apart.
module polymul_checker
  import ntt_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned LOGN = 4
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int unsigned N     = 1 << LOGN;
  localparam int unsigned NPOLY = 3;

  logic  in_valid, out_valid;
  coef_t a0, a1, b0, b1, c0, c1;
  vec_t  av [NPOLY];
  vec_t  bv [NPOLY];
  vec_t  cx [NPOLY];
  longint cycle;
  longint first_out [NPOLY];

  polymul_top #(.LOGN(LOGN)) dut (
    .clk(clk), .rst(rst), .in_valid(in_valid), .a0(a0), .a1(a1), .b0(b0), .b1(b1),
    .out_valid(out_valid), .c0(c0), .c1(c1));

  always_ff @(posedge clk) begin
    if (rst) cycle <= 0;
    else     cycle <= cycle + 1;
  end

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int p = 0; p < NPOLY; p++) begin
      for (int i = 0; i < MAX_N; i++) begin
        av[p][i] = (i < N) ? 64'($urandom_range(Q - 1)) : 0;
        bv[p][i] = (i < N) ? 64'($urandom_range(Q - 1)) : 0;
      end
      cx[p] = negacyclic(av[p], bv[p], LOGN);
    end
  end

  initial begin
    in_valid = 0; a0 = 0; a1 = 0; b0 = 0; b1 = 0;
    @(negedge rst);
    @(posedge clk); #1;
    for (int p = 0; p < NPOLY; p++) begin
      if (p == NPOLY - 1) begin
        in_valid = 0;
        repeat (N / 4 + 3) @(posedge clk);
        #1;
      end
      for (int t = 0; t < N / 2; t++) begin
        in_valid = 1;
        a0 = coef_t'(av[p][t]); a1 = coef_t'(av[p][t + N / 2]);
        b0 = coef_t'(bv[p][t]); b1 = coef_t'(bv[p][t + N / 2]);
        @(posedge clk); #1;
      end
    end
    in_valid = 0;
  end

  initial begin
    int p, c;
    p = 0; c = 0;
    while (p < NPOLY) begin
      @(posedge clk); #1;
      if (out_valid) begin
        if (c == 0) first_out[p] = cycle;
        checks++;
        if (64'(c0) != cx[p][c] || 64'(c1) != cx[p][c + N / 2]) begin
          failures++;
          if (failures < 6) $display("N=%0d poly %0d pair %0d: got %0d %0d expected %0d %0d",
                                     N, p, c, c0, c1, cx[p][c], cx[p][c + N / 2]);
        end
        c++;
        if (c == N / 2) begin c = 0; p++; end
      end
    end
    checks++;
    if (first_out[1] - first_out[0] != N / 2) begin
      failures++;
      $display("N=%0d: back-to-back products %0d clocks apart", N, first_out[1] - first_out[0]);
    end
    done = 1;
  end
endmodule
