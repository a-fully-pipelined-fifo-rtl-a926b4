// tb_ntt: forward NTT at N = 256. Three random polynomials (two
// back-to-back, one after an idle gap) enter as pairs (x_i, x_{i+N/2}); the
// outputs, pairs of bit-reversed positions (2t, 2t+1), are compared with the
// transform computed from its definition. Also checked: first-output latency
// of 205 clocks, unbroken output bursts, one polynomial every N/2 clocks.
module tb_ntt;
  import ntt_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned LOGN  = 8;
  localparam int unsigned N     = 1 << LOGN;
  localparam int unsigned NPOLY = 3;
  localparam int unsigned LAT   = 205;
  localparam int unsigned GAP   = 70;      // idle clocks before the last polynomial

  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  int n_back_to_back = 0, n_after_gap = 0;
  logic  in_valid, out_valid;
  coef_t x0, x1, y0, y1;
  vec_t  xin [NPOLY];
  vec_t  yex [NPOLY];
  ntt #(.LOGN(LOGN)) dut (.clk(clk), .rst(rst), .in_valid(in_valid), .x0(x0), .x1(x1),
                          .out_valid(out_valid), .y0(y0), .y1(y1));
  longint cycle;
  longint start_cycle [NPOLY];
  longint first_out   [NPOLY];

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (rst) cycle <= 0;
    else     cycle <= cycle + 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    in_valid = 0; x0 = 0; x1 = 0;
    for (int p = 0; p < NPOLY; p++) begin
      for (int i = 0; i < N; i++) xin[p][i] = (p == 0 && i < 4) ? Q - 1 : $urandom_range(Q - 1);
      yex[p] = ntt_ref(xin[p], LOGN);
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
        x0 = coef_t'(xin[p][t]);
        x1 = coef_t'(xin[p][t + N / 2]);
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
        e0 = yex[p][2 * c];
        e1 = yex[p][2 * c + 1];
        checks++;
        if (64'(y0) != e0 || 64'(y1) != e1) begin
          failures++;
          if (failures < 6) $display("poly %0d pair %0d: got %0d %0d expected %0d %0d",
                                     p, c, 64'(y0), 64'(y1), e0, e1);
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
