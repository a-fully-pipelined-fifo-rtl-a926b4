// tb_pointwise_mul: element-wise product unit. Three random polynomial
// pairs (two back-to-back, one after a gap); each output pair must be the
// two products mod Q, 9 clocks after its inputs.
module tb_pointwise_mul;
  import ntt_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned LOGN  = 8;
  localparam int unsigned N     = 1 << LOGN;
  localparam int unsigned NPOLY = 3;
  localparam int unsigned LAT   = 9;
  localparam int unsigned GAP   = 20;      // idle clocks before the last polynomial

  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  int n_back_to_back = 0, n_after_gap = 0;
  logic  in_valid, out_valid;
  coef_t a0, a1, b0, b1, c0, c1;
  vec_t  av [NPOLY];
  vec_t  bv [NPOLY];
  pointwise_mul dut (.clk(clk), .rst(rst), .in_valid(in_valid), .a0(a0), .a1(a1),
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
    repeat (3000) @(posedge clk);
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
        av[p][i] = (p == 0 && i < 4) ? Q - 1 : $urandom_range(Q - 1);
        bv[p][i] = (p == 0 && i < 4) ? Q - 1 - i : $urandom_range(Q - 1);
      end
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
        a0 = coef_t'(av[p][2 * t]);     a1 = coef_t'(av[p][2 * t + 1]);
        b0 = coef_t'(bv[p][2 * t]);     b1 = coef_t'(bv[p][2 * t + 1]);
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
        e0 = mulmod(av[p][2 * c], bv[p][2 * c]);
        e1 = mulmod(av[p][2 * c + 1], bv[p][2 * c + 1]);
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

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
