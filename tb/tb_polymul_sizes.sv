// tb_polymul_sizes: the polynomial multiplier elaborated for the smaller
// polynomial degrees of the paper's clock-count comparison, N = 16, 32, 64
// and 128 (LOGN = 4..7), each multiplying three random polynomial pairs
// against a schoolbook reference (see polymul_checker). The default size,
// N = 256, is covered by tb_polymul_top.
module tb_polymul_sizes;
  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  localparam int NCFG = 4;
  int   ck [NCFG];
  int   fl [NCFG];
  logic dn [NCFG];

  always #5 clk = ~clk;

  for (genvar g = 0; g < NCFG; g++) begin : g_size
    polymul_checker #(.LOGN(4 + g)) u_chk (
      .clk(clk), .rst(rst), .checks(ck[g]), .failures(fl[g]), .done(dn[g]));
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    do begin
      @(posedge clk);
      all = 1;
      for (int g = 0; g < NCFG; g++) all &= dn[g];
    end while (!all);
    for (int g = 0; g < NCFG; g++) begin
      checks   += ck[g];
      failures += fl[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
