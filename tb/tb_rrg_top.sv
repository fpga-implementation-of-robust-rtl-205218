// tb_rrg_top: end-to-end test of the robust residual generator at its
// default parameters (N = 10).
//
// Phase 1 is the fault-detection run of the fixed-point design: 2000
// samples of y(k) = d*u(k) + e(k) + f(k) with d = 2, u = 2, e(k) about
// N(0,1), the identified gain dhat = 2.04 (code 131), and an additive fault
// f = 10 on samples 800..1199.  The threshold is 23.59, the 0.5 % point of
// the chi-squared distribution with N-1 = 9 degrees of freedom.
// Phase 2 drives residuals that clip at the s12.6 limit, then a run of equal
// residuals whose window variance is zero, so the statistic clips.
// Phase 3 runs on until the sample counter saturates.
//
// Every output is compared with an integer reference of the whole datapath,
// and the latency of every sample is checked.  The input is offered while
// the design is busy, so it stalls.  Each mechanism (stall, residual
// clipping, statistic clipping, alarm, window filling, counter saturation)
// must happen at least once.  Detection and false-alarm rates of phase 1
// are printed; at least 90 % of the faulty samples must raise the alarm and
// at most 2 % of the fault-free ones.
module tb_rrg_top;
  import rrg_pkg::*;
  import tb_rrg_ref_pkg::*;

  localparam int N       = 10;
  localparam int LATENCY = 2 * N + CHI_W + 7;     // clocks, take to out_valid
  localparam int SAT_LAT = 2 * N + 7;             // when the divider clips

  logic   clk = 0, rst = 1;
  logic   in_valid = 0, in_ready;
  ym_t    ym; u_t u; dhat_t dhat; chi_t gamma;
  logic   out_valid, alarm, window_full, res_sat, chi_sat;
  chi_t   chi_sq;
  ravg_t  r_avg;
  rvar_t  r_var;
  count_t count;

  int checks = 0, failures = 0;
  int n_stall = 0, n_res_sat = 0, n_chi_sat = 0, n_alarm = 0, n_fill = 0, n_cnt_sat = 0;
  int fault_alarms = 0, fault_samples = 0, false_alarms = 0, clean_samples = 0;
  longint rwin [] = new[N];
  int samples = 0;
  longint cyc = 0;

  rrg_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (in_valid && !in_ready && !rst) n_stall++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one sample through the design; returns the alarm
  task automatic sample(longint y, longint uu, longint d, output bit al);
    longint r, chi, t0;
    ref_stats_t e;
    bit was_full, esat;
    r = ref_residual(y, uu, d);
    for (int j = N - 1; j > 0; j--) rwin[j] = rwin[j-1];
    rwin[0] = r;
    e = ref_stats(rwin, N);
    chi = ref_chi(e.r_sq_sum, e.r_var);
    esat = (e.r_var == 0) || ((e.r_sq_sum * 64) / e.r_var > umax(17));
    was_full = window_full;
    ym = ym_t'(y); u = u_t'(uu); dhat = dhat_t'(d);
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    t0 = cyc;                                   // accepting clock edge
    @(negedge clk);
    // keep offering a next sample while busy, to exercise the stall
    in_valid = 1;
    samples++;
    while (!out_valid) @(negedge clk);
    in_valid = 0;
    checks++;
    if (cyc - t0 != longint'(esat ? SAT_LAT : LATENCY)) begin
      failures++;
      $display("FAIL sample %0d latency %0d", samples, cyc - t0);
    end
    checks++;
    if (longint'(chi_sq) != chi || alarm != (chi > longint'(gamma)) || chi_sat != esat ||
        longint'(r_avg) != e.r_avg || longint'(r_var) != e.r_var ||
        res_sat != (r != y - d * uu)) begin
      failures++;
      $display("FAIL sample %0d: chi %0d/%0d alarm %0b avg %0d/%0d var %0d/%0d sat %0b/%0b",
               samples, chi_sq, chi, alarm, r_avg, e.r_avg, r_var, e.r_var, chi_sat, esat);
    end
    checks++;
    if (window_full != (samples >= N) || longint'(count) != ((samples > 2047) ? 2047 : samples)) begin
      failures++;
      $display("FAIL sample %0d: full %0b count %0d", samples, window_full, count);
    end
    if (res_sat) n_res_sat++;
    if (chi_sat) n_chi_sat++;
    if (alarm)   n_alarm++;
    if (!was_full && window_full) n_fill++;
    if (samples > 2047 && count == 11'd2047) n_cnt_sat++;
    al = alarm;
  endtask

  function automatic longint quant(real v);   // real -> s12.6 code, floor
    return clamp(longint'($floor(v * 64.0)), smin(12), smax(12));
  endfunction

  initial begin
    bit al;
    real y;
    for (int j = 0; j < N; j++) rwin[j] = 0;
    ym = '0; u = '0; dhat = '0;
    gamma = chi_t'(1510);                       // 23.59 in u17.6
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;

    // phase 1: fault detection run
    for (int k = 0; k < 2000; k++) begin
      y = 2.0 * 2.0 + gauss() + ((k >= 800 && k < 1200) ? 10.0 : 0.0);
      sample(quant(y), 2, 131, al);
      if (k >= 800 + N && k < 1200) begin fault_samples++; if (al) fault_alarms++; end
      if ((k >= N && k < 800) || k >= 1200 + N) begin clean_samples++; if (al) false_alarms++; end
    end
    $display("detection: %0d of %0d faulty samples; false alarms: %0d of %0d (%0.2f %%)",
             fault_alarms, fault_samples, false_alarms, clean_samples,
             100.0 * false_alarms / clean_samples);
    checks++;
    if (fault_alarms * 10 < fault_samples * 9) begin failures++; $display("FAIL detection rate"); end
    checks++;
    if (false_alarms * 50 > clean_samples) begin failures++; $display("FAIL false-alarm rate"); end

    // phase 2: clipping of r and of the statistic
    for (int k = 0; k < 3; k++) sample(-2048, 3, 255, al);
    for (int k = 0; k < 12; k++) sample(300, 2, 131, al);

    // phase 3: until the counter saturates
    while (samples < 2060) sample(quant(4.0 + gauss()), 2, 131, al);

    checks++; if (n_stall   == 0) begin failures++; $display("FAIL no stall");              end
    checks++; if (n_res_sat == 0) begin failures++; $display("FAIL r never clipped");       end
    checks++; if (n_chi_sat == 0) begin failures++; $display("FAIL tau never clipped");     end
    checks++; if (n_alarm   == 0) begin failures++; $display("FAIL no alarm");              end
    checks++; if (n_fill    == 0) begin failures++; $display("FAIL window never filled");   end
    checks++; if (n_cnt_sat == 0) begin failures++; $display("FAIL counter never saturated"); end
    $display("stalled clocks %0d, r clipped %0d, tau clipped %0d, alarms %0d, fills %0d, counter saturated %0d",
             n_stall, n_res_sat, n_chi_sat, n_alarm, n_fill, n_cnt_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
