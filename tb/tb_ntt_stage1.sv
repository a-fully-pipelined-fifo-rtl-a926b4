// tb_ntt_stage1: random and boundary pairs through the twiddle-free stage;
// one clock later fs_o1 must be ai + aj mod Q and fs_o2 ai - aj mod Q.
module tb_ntt_stage1;
  import ntt_pkg::*;
  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  logic  in_valid, out_valid;
  coef_t ai, aj, o1, o2;
  ntt_stage1 dut (.clk(clk), .rst(rst), .in_valid(in_valid), .ai(ai), .aj(aj),
                  .out_valid(out_valid), .fs_o1(o1), .fs_o2(o2));
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint unsigned e1, e2;
    in_valid = 0; ai = 0; aj = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      in_valid = n[0];
      if (n < 16) begin ai = coef_t'(n[1] ? Q - 1 : 0); aj = coef_t'(n[2] ? Q - 1 : 1); end
      else begin ai = coef_t'($urandom_range(Q - 1)); aj = coef_t'($urandom_range(Q - 1)); end
      e1 = (64'(ai) + 64'(aj)) % 64'(Q);
      e2 = (64'(ai) + 64'(Q) - 64'(aj)) % 64'(Q);
      @(posedge clk); #1;
      checks++;
      if (out_valid !== n[0] || 64'(o1) != e1 || 64'(o2) != e2) begin
        failures++;
        if (failures < 10) $display("mismatch: v=%0b %0d %0d expected %0d %0d", out_valid, o1, o2, e1, e2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
