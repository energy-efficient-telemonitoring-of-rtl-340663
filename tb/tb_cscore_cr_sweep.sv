// tb_cscore_cr_sweep: the compressor at every compression ratio evaluated
// for EEG and fetal ECG packets.
//
// Packets of N = 512 samples are compressed at CR = 0.5, 0.6, 0.7, 0.8 and
// 0.9, i.e. M = round(512 * (1 - CR)) = 256, 205, 154, 102 and 51
// measurements, with four packets each. Each size is a separate cscore
// instance with its own matrix, checked by tb_cs_harness.
module tb_cscore_cr_sweep;
  localparam int NCFG = 5;
  localparam int unsigned MS [NCFG] = '{256, 205, 154, 102, 51};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int   c [NCFG];
  int   f [NCFG];
  logic fin [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cr
    tb_cs_harness #(.N(512), .M(MS[g]), .PKTS(4), .SEED(g + 1)) h (
      .clk(clk), .checks(c[g]), .failures(f[g]), .finished(fin[g])
    );
  end

  function automatic bit all_done();
    for (int g = 0; g < NCFG; g++) if (!fin[g]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    int checks, failures;
    @(posedge clk);
    while (!all_done()) @(posedge clk);
    checks   = 0;
    failures = 0;
    for (int g = 0; g < NCFG; g++) begin
      $display("M=%0d: checks=%0d failures=%0d", MS[g], c[g], f[g]);
      checks   += c[g];
      failures += f[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int checks, failures;
    repeat (4 * (512 * 6 + 300) + 1000) @(posedge clk);
    checks   = 0;
    failures = 1;
    for (int g = 0; g < NCFG; g++) begin
      checks   += c[g];
      failures += f[g];
    end
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
