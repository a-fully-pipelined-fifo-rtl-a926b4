// tb_fifo_stage: checks the FIFO-based stage in five configurations at
// N = 256: forward stages 2 (hold 64 clocks), 5 (8) and 8 (1), inverse stages
// 3 (2) and 8 (64). See fifo_stage_checker for what each one checks.
module tb_fifo_stage;
  logic clk = 0;
  logic rst = 1;
  int checks = 0, failures = 0;
  localparam int NCFG = 5;
  localparam int STG [NCFG] = '{2, 5, 8, 3, 8};
  localparam bit INV [NCFG] = '{1'b0, 1'b0, 1'b0, 1'b1, 1'b1};
  int   ck [NCFG];
  int   fl [NCFG];
  logic dn [NCFG];

  always #5 clk = ~clk;

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    fifo_stage_checker #(.LOGN(8), .STAGE(STG[g]), .INVERSE(INV[g])) u_chk (
      .clk(clk), .rst(rst), .checks(ck[g]), .failures(fl[g]), .done(dn[g]));
  end

  initial begin
    repeat (20000) @(posedge clk);
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
