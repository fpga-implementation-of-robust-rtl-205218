// tb_rrg_run: testbench helper that runs one detection experiment on an
// rrg_top of window length N and checks it against the integer reference.
//
// After start it feeds NSAMP samples of y(k) = 2*u(k) + e(k) + f(k) with
// u = 2, e(k) about N(0,1) and an additive fault f = FAULT on samples
// F_BEGIN..F_END-1 (no fault when F_BEGIN = F_END), using the identified
// gain code DHAT (u8.6) and the threshold code GAMMA (u17.6).  Every result
// is compared with the reference; done rises when the run is over.  It
// reports the number of alarms on fault-free samples whose window is full
// and holds no faulty sample, and on faulty samples whose window is full of
// faulty samples.
module tb_rrg_run
  import rrg_pkg::*;
  import tb_rrg_ref_pkg::*;
#(
  parameter int N       = 10,
  parameter int NSAMP   = 1000,
  parameter int F_BEGIN = 0,
  parameter int F_END   = 0,
  parameter real FAULT  = 10.0,
  parameter int DHAT    = 131,
  parameter int GAMMA   = 1510
)(
  input  logic clk,
  input  logic rst,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   clean_samples,
  output int   false_alarms,
  output int   fault_samples,
  output int   fault_alarms
);

  logic   in_valid, in_ready, out_valid, alarm, window_full, res_sat, chi_sat;
  ym_t    ym; u_t u; dhat_t dhat; chi_t gamma;
  chi_t   chi_sq;
  ravg_t  r_avg;
  rvar_t  r_var;
  count_t count;

  rrg_top #(.N(N)) dut (.*);

  initial begin
    longint rwin [];
    longint y, r, chi;
    ref_stats_t e;
    rwin = new[N];
    for (int j = 0; j < N; j++) rwin[j] = 0;
    done = 0; checks = 0; failures = 0;
    clean_samples = 0; false_alarms = 0; fault_samples = 0; fault_alarms = 0;
    in_valid = 0; ym = '0; u = 2'd2; dhat = dhat_t'(DHAT); gamma = chi_t'(GAMMA);
    wait (start && !rst);
    for (int k = 0; k < NSAMP; k++) begin
      y = clamp(longint'($floor((4.0 + gauss() + ((k >= F_BEGIN && k < F_END) ? FAULT : 0.0)) * 64.0)),
                smin(12), smax(12));
      r = ref_residual(y, 2, DHAT);
      for (int j = N - 1; j > 0; j--) rwin[j] = rwin[j-1];
      rwin[0] = r;
      e = ref_stats(rwin, N);
      chi = ref_chi(e.r_sq_sum, e.r_var);
      @(negedge clk);
      ym = ym_t'(y); in_valid = 1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      checks++;
      if (longint'(chi_sq) != chi || alarm != (chi > GAMMA)) begin
        failures++;
        $display("FAIL N=%0d sample %0d: chi %0d expected %0d", N, k, chi_sq, chi);
      end
      if (k >= N - 1 && (k < F_BEGIN || k >= F_END + N - 1)) begin
        clean_samples++; if (alarm) false_alarms++;
      end
      if (k >= F_BEGIN + N - 1 && k < F_END) begin
        fault_samples++; if (alarm) fault_alarms++;
      end
    end
    done = 1;
  end

endmodule
