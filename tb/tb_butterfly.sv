// tb_butterfly: random operands with in_valid toggled at random; each valid
// result must appear exactly 11 clocks after its operands with
// o1 = aj + w*ai mod Q and o2 = aj - w*ai mod Q, and out_valid must mirror
// in_valid delayed by 11.
module tb_butterfly;
  import ntt_pkg::*;
  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  logic  in_valid, out_valid;
  coef_t ai, aj, w, o1, o2;
  localparam int LAT = 11;
  longint unsigned e1q [$], e2q [$];
  logic vq [$];
  butterfly dut (.clk(clk), .rst(rst), .in_valid(in_valid), .ai(ai), .aj(aj), .w(w),
                 .out_valid(out_valid), .o1(o1), .o2(o2));
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint unsigned t, e1, e2;
    logic ev;
    in_valid = 0; ai = 0; aj = 0; w = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < LAT - 1; n++) begin vq.push_back(1'b0); e1q.push_back(0); e2q.push_back(0); end
    for (int n = 0; n < 4000; n++) begin
      in_valid = ($urandom_range(3) != 0);
      if (n < 50) begin ai = coef_t'(Q - 1); aj = coef_t'(n); w = coef_t'(Q - 1 - n); end
      else begin
        ai = coef_t'($urandom_range(Q - 1)); aj = coef_t'($urandom_range(Q - 1));
        w = coef_t'($urandom_range(Q - 1));
      end
      t = mulmod(ai, w);
      vq.push_back(in_valid);
      e1q.push_back((64'(aj) + t) % 64'(Q));
      e2q.push_back((64'(aj) + 64'(Q) - t) % 64'(Q));
      @(posedge clk); #1;
      ev = vq.pop_front(); e1 = e1q.pop_front(); e2 = e2q.pop_front();
      checks++;
      if (out_valid !== ev) begin failures++; $display("valid mismatch at %0d", n); end
      if (ev) begin
        checks++;
        if (64'(o1) != e1 || 64'(o2) != e2) begin
          failures++;
          if (failures < 10) $display("mismatch: %0d %0d expected %0d %0d", o1, o2, e1, e2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
