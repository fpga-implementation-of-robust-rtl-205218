// tb_rrg_l20: fault-detection run with a 20-sample detection window.
//
// 1000 samples, additive fault of 10 on samples 400..699, window N = 20,
// threshold 38.6 (the 0.5 % point of the chi-squared distribution with 19
// degrees of freedom) and the gain identified at 20 dB SNR, dhat = 1.99
// (code 127).  Every statistic is checked against the integer reference; at
// least 90 % of the fully faulty windows must raise the alarm and at most
// 2 % of the fault-free ones.
module tb_rrg_l20;
  logic clk = 0, rst = 1, start = 0, done;
  int checks, failures, clean_samples, false_alarms, fault_samples, fault_alarms;
  int total_checks = 0, total_failures = 0;

  tb_rrg_run #(.N(20), .NSAMP(1000), .F_BEGIN(400), .F_END(700), .FAULT(10.0),
               .DHAT(127), .GAMMA(2470)) run (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0; start = 1;
    wait (done);
    total_checks = checks + 2; total_failures = failures;
    $display("N=20: detection %0d of %0d, false alarms %0d of %0d (%0.2f %%)",
             fault_alarms, fault_samples, false_alarms, clean_samples,
             100.0 * false_alarms / clean_samples);
    if (fault_alarms * 10 < fault_samples * 9) begin total_failures++; $display("FAIL detection rate"); end
    if (false_alarms * 50 > clean_samples)     begin total_failures++; $display("FAIL false-alarm rate"); end
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end
endmodule
