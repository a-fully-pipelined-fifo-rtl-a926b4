// tb_ka_mul: random and corner-case operands through the Karatsuba
// multiplier; every product is compared with a*b exactly 6 clocks after the
// operands were applied.
module tb_ka_mul;
  logic clk = 0;
  logic [20:0] a, b;
  logic [41:0] p;
  int checks = 0, failures = 0;
  localparam int LAT = 6;
  logic [41:0] expq [$];

  ka_mul #(.AW(21)) dut (.clk(clk), .a(a), .b(b), .p(p));
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000 + LAT; i++) begin
      if (i < 2000) begin
        case (i)
          0: begin a = '1; b = '1; end
          1: begin a = 0;  b = '1; end
          2: begin a = 21'h7FF; b = 21'h1FF800; end
          3: begin a = 21'd1049088; b = 21'd1049088; end
          default: begin a = 21'($urandom); b = 21'($urandom); end
        endcase
        expq.push_back(42'(a) * 42'(b));
      end
      @(posedge clk); #1;
      if (i >= LAT - 1 && expq.size() > 0 && i - (LAT - 1) < 2000) begin
        logic [41:0] e;
        e = expq.pop_front();
        checks++;
        if (p !== e) begin
          failures++;
          if (failures < 10) $display("mismatch: p=%h expected %h", p, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
