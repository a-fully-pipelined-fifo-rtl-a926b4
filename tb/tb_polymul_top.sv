// tb_polymul_top: end-to-end test of the polynomial multiplier at its
// default size (N = 256, Q = 1049089, no parameter overrides). Four
// polynomial pairs are multiplied: three back-to-back (pipelined operation),
// then one after an idle gap of 70 clocks, which exercises the FIFO stages'
// flush of a polynomial's last pairs. Pair 0 holds x^(N-1) * x, whose
// negacyclic product is -1; the others are random. Every output coefficient
// is compared with a schoolbook product mod (x^N + 1). Also checked:
// first-output latency of 437 clocks, unbroken output bursts, and one product
// every N/2 = 128 clocks for back-to-back inputs (the throughput the design
// is built for). The number of back-to-back and post-gap polynomials is
// reported and each must be nonzero.
module tb_polymul_top;
  import ntt_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned LOGN  = 8;
  localparam int unsigned N     = 1 << LOGN;
  localparam int unsigned NPOLY = 4;
  localparam int unsigned LAT   = 437;
  localparam int unsigned GAP   = 70;      // idle clocks before the last polynomial

  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  int n_back_to_back = 0, n_after_gap = 0;
  logic  in_valid, out_valid;
  coef_t a0, a1, b0, b1, c0, c1;
  vec_t  av [NPOLY];
  vec_t  bv [NPOLY];
  vec_t  cx [NPOLY];
  polymul_top dut (.clk(clk), .rst(rst), .in_valid(in_valid), .a0(a0), .a1(a1),
                   .b0(b0), .b1(b1), .out_valid(out_valid), .c0(c0), .c1(c1));
  longint cycle;
  longint start_cycle [NPOLY];
  longint first_out   [NPOLY];

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (rst) cycle <= 0;
    else     cycle <= cycle + 1;
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    in_valid = 0; a0 = 0; a1 = 0; b0 = 0; b1 = 0;
    for (int p = 0; p < NPOLY; p++) begin
      for (int i = 0; i < N; i++) begin
        if (p == 0) begin
          av[p][i] = (i == N - 1) ? 1 : 0;
          bv[p][i] = (i == 1) ? 1 : 0;
        end else begin
          av[p][i] = $urandom_range(Q - 1);
          bv[p][i] = (p == 1 && i < 8) ? Q - 1 : $urandom_range(Q - 1);
        end
      end
      cx[p] = negacyclic(av[p], bv[p], LOGN);
    end
    in_valid = 0;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    for (int p = 0; p < NPOLY; p++) begin
      if (p == NPOLY - 1 && GAP > 0) begin
    in_valid = 0;
        repeat (GAP) @(posedge clk);
        #1;
        n_after_gap++;
      end else if (p > 0) n_back_to_back++;
      start_cycle[p] = cycle;
      for (int t = 0; t < N / 2; t++) begin
        in_valid = 1;
        a0 = coef_t'(av[p][t]);     a1 = coef_t'(av[p][t + N / 2]);
        b0 = coef_t'(bv[p][t]);     b1 = coef_t'(bv[p][t + N / 2]);
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
    @(negedge rst);
    while (p < NPOLY) begin
      @(posedge clk); #1;
      if (out_valid) begin
        longint unsigned e0, e1;
        e0 = cx[p][c];
        e1 = cx[p][c + N / 2];
        checks++;
        if (64'(c0) != e0 || 64'(c1) != e1) begin
          failures++;
          if (failures < 6) $display("poly %0d pair %0d: got %0d %0d expected %0d %0d",
                                     p, c, 64'(c0), 64'(c1), e0, e1);
        end
        if (c == 0) begin
          first_out[p] = cycle;
          checks++;
          if (cycle - start_cycle[p] != LAT) begin
            failures++;
            $display("poly %0d: latency %0d expected %0d", p, cycle - start_cycle[p], LAT);
          end
        end else begin
          checks++;
          if (cycle != last + 1) begin
            failures++;
            $display("poly %0d: gap inside the output burst", p);
          end
        end
        last = cycle;
        c++;
        if (c == N / 2) begin c = 0; p++; end
      end
    end
    // back-to-back polynomials leave one every N/2 clocks
    for (int q = 1; q < NPOLY - (GAP > 0 ? 1 : 0); q++) begin
      checks++;
      if (first_out[q] - first_out[q-1] != N / 2) begin
        failures++;
        $display("poly %0d: started %0d clocks after the previous one", q, first_out[q] - first_out[q-1]);
      end
    end
    $display("back-to-back polynomials: %0d, polynomials after an idle gap: %0d",
             n_back_to_back, n_after_gap);
    checks++;
    if (n_back_to_back == 0 || (GAP > 0 && n_after_gap == 0)) failures++;
    checks++;
    if (cx[0][0] != Q - 1) begin
      failures++;
      $display("reference check: x^(N-1) * x should be -1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
