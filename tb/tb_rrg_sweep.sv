// tb_rrg_sweep: false-alarm rate against detection window length and
// identification quality.
//
// Sixteen fault-free runs of 2000 samples in parallel: window lengths
// N = 10, 20, 40, 100, each with the gain identified at 40, 20, 0 and
// -20 dB SNR.  The gain error d - dhat at those SNRs is 0.002 (rounded to
// 0), 0.01, -0.10 and -0.65, giving dhat codes 128, 127, 134 and 170 (u8.6).
// The threshold of each N is the 0.5 % point of the chi-squared
// distribution with N-1 degrees of freedom (23.59, 38.58, 65.48, 138.99).
// Every statistic is checked against the integer reference.  The table of
// false-alarm rates is printed; for every N the poorly identified gain
// (-20 dB) must give more false alarms than the well identified one (20 dB).
module tb_rrg_sweep;
  localparam int NN = 4, NS = 4;
  localparam int NV    [NN] = '{10, 20, 40, 100};
  localparam int GV    [NN] = '{1510, 2469, 4190, 8895};
  localparam int DV    [NS] = '{128, 127, 134, 170};
  localparam int SNRV  [NS] = '{40, 20, 0, -20};

  logic clk = 0, rst = 1, start = 0;
  logic done   [NN][NS];
  int   chk    [NN][NS], fl [NN][NS], cs [NN][NS], fa [NN][NS], fs [NN][NS], fda [NN][NS];

  for (genvar a = 0; a < NN; a++) begin : g_n
    for (genvar b = 0; b < NS; b++) begin : g_snr
      tb_rrg_run #(.N(NV[a]), .NSAMP(2000), .F_BEGIN(0), .F_END(0),
                   .DHAT(DV[b]), .GAMMA(GV[a])) run (
        .clk, .rst, .start, .done(done[a][b]), .checks(chk[a][b]), .failures(fl[a][b]),
        .clean_samples(cs[a][b]), .false_alarms(fa[a][b]),
        .fault_samples(fs[a][b]), .fault_alarms(fda[a][b]));
    end
  end

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

  initial begin
    int checks, failures;
    bit all_done;
    repeat (3) @(posedge clk);
    rst = 0; start = 1;
    do begin
      @(posedge clk);
      all_done = 1;
      for (int a = 0; a < NN; a++) for (int b = 0; b < NS; b++) all_done &= done[a][b];
    end while (!all_done);
    checks = 0; failures = 0;
    $display("false-alarm rate in %%, rows N, columns SNR 40 / 20 / 0 / -20 dB");
    for (int a = 0; a < NN; a++) begin
      $display("N=%3d  %6.2f %6.2f %6.2f %6.2f", NV[a],
               100.0 * fa[a][0] / cs[a][0], 100.0 * fa[a][1] / cs[a][1],
               100.0 * fa[a][2] / cs[a][2], 100.0 * fa[a][3] / cs[a][3]);
      for (int b = 0; b < NS; b++) begin checks += chk[a][b]; failures += fl[a][b]; end
      checks++;
      if (fa[a][3] <= fa[a][1]) begin
        failures++;
        $display("FAIL N=%0d: -20 dB gain gives no more false alarms than 20 dB", NV[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
