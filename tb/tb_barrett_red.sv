// tb_barrett_red: products of coefficients below Q (random, and the largest
// ones, where the quotient estimate is off by one and bit 40 of r1 is set)
// are reduced; each result is compared with I mod Q exactly 3 clocks later.
// The testbench also counts, from its own arithmetic, how many inputs make
// bit 40 of I - I/2^11 one and how many make the quotient estimate one too
// large (the case the final +Q correction handles); both must occur.
module tb_barrett_red;
  import ntt_pkg::*;
  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  logic [41:0] i;
  coef_t r;
  localparam int LAT = 3;
  longint unsigned expq [$];
  barrett_red dut (.clk(clk), .i(i), .r(r));
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int n_bit40 = 0, n_over = 0;
  initial begin
    longint unsigned x, y, e, r1v;
    for (int n = 0; n < 20000 + LAT; n++) begin
      if (n < 20000) begin
        if (n < 4000) begin x = Q - 1 - (n % 64); y = Q - 1 - (n / 64); end
        else begin x = $urandom_range(Q - 1); y = $urandom_range(Q - 1); end
        i = 42'(x * y);
        r1v = x * y - ((x * y) >> 11);
        if (r1v[40]) n_bit40++;
        if ((r1v >> 20) > (x * y) / 64'(Q)) n_over++;
        expq.push_back((x * y) % 64'(Q));
      end
      @(posedge clk); #1;
      if (n >= LAT - 1 && n - (LAT - 1) < 20000) begin
        e = expq.pop_front();
        checks++;
        if (64'(r) != e) begin
          failures++;
          if (failures < 10) $display("mismatch: r=%0d expected %0d", r, e);
        end
      end
    end
    $display("inputs with r1[40] set: %0d, with quotient estimate one too large: %0d", n_bit40, n_over);
    checks++;
    if (n_bit40 == 0 || n_over == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
