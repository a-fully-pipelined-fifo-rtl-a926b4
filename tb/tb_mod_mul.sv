// tb_mod_mul: random and extreme coefficient pairs through the modular
// multiplier; each product is compared with a*b mod Q exactly 9 clocks later.
module tb_mod_mul;
  import ntt_pkg::*;
  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  coef_t a, b, p;
  localparam int LAT = 9;
  longint unsigned expq [$];
  mod_mul dut (.clk(clk), .a(a), .b(b), .p(p));
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint unsigned e;
    for (int n = 0; n < 5000 + LAT; n++) begin
      if (n < 5000) begin
        if (n < 100) begin a = coef_t'(Q - 1 - n); b = coef_t'(Q - 1 - (n % 7)); end
        else begin a = coef_t'($urandom_range(Q - 1)); b = coef_t'($urandom_range(Q - 1)); end
        expq.push_back(mulmod(a, b));
      end
      @(posedge clk); #1;
      if (n >= LAT - 1 && n - (LAT - 1) < 5000) begin
        e = expq.pop_front();
        checks++;
        if (64'(p) != e) begin
          failures++;
          if (failures < 10) $display("mismatch: p=%0d expected %0d", p, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
