// rrg_top: fixed-point robust residual generator with chi-squared fault test.
//
// For a plant identified as y(k) = dhat*u(k) + e(k), every new sample pair
// (u(k), ym(k)) produces
//   1. the residual  r(k) = ym(k) - dhat*u(k)                (rrg_residual)
//   2. the detection window of the last N residuals          (rrg_window)
//   3. r_sum, r_avg, r_sq_sum and the window variance r_var  (rrg_window_stats)
//   4. the test statistic tau(k) = r_sq_sum / r_var          (rrg_divider)
//   5. the alarm  tau(k) > gamma                             (rrg_threshold)
// A fault (an additive offset on the output) moves the window mean away from
// zero, so r_sq_sum grows while r_var, which removes the mean, stays at the
// noise variance: tau rises far above the chi-squared threshold.
//
// The chain of units, the word lengths (all with 6 fractional bits) and
// N = 10 follow the paper's fixed-point design.  The sequential scheduling,
// the valid/ready handshake, the sample counter's saturation and the
// threshold input are this design's choices.
//
// Interface: a sample is taken when in_valid && in_ready.  in_ready falls
// while the sample is being processed (the input stalls) and rises again
// with out_valid.  out_valid pulses once per sample with chi_sq, alarm and
// the window statistics; window_full tells whether the window already held N
// real samples; count is the number of samples taken, saturating at 2047.
// Latency: 2*N + CHI_W + 7 clocks from the accepting clock edge to
// out_valid (44 clocks at the defaults; 2*N + 7 when the statistic clips),
// and in_ready returns the clock after out_valid.  Synchronous active-high
// reset.
module rrg_top
  import rrg_pkg::*;
#(
  parameter int unsigned N = 10              // detection window length
)(
  input  logic   clk,
  input  logic   rst,
  // sample input
  input  logic   in_valid,
  output logic   in_ready,
  input  ym_t    ym,                         // measured output  s12.6
  input  u_t     u,                          // plant input      u2.0
  input  dhat_t  dhat,                       // identified gain  u8.6
  input  chi_t   gamma,                      // threshold        u17.6
  // result output
  output logic   out_valid,
  output chi_t   chi_sq,                     // tau(k)           u17.6
  output logic   alarm,                      // tau(k) > gamma
  output ravg_t  r_avg,                      // window mean      s11.6
  output rvar_t  r_var,                      // window variance  u12.6
  output logic   window_full,
  output count_t count,
  output logic   res_sat,                    // r(k) was clipped to s12.6
  output logic   chi_sat                     // tau(k) was clipped to u17.6
);

  logic   busy;
  logic   take;

  logic   res_valid;
  r_t     r;
  r_t     win [N];
  logic [$clog2(N + 1)-1:0] fill;

  logic   stats_start, stats_busy, stats_done;
  stats_t stats;

  logic   div_busy, div_done;
  chi_t   div_q;
  logic   thr_valid;

  assign in_ready = !busy;
  assign take     = in_valid && in_ready;

  rrg_residual u_residual (
    .clk, .rst,
    .in_valid (take),
    .ym, .u, .dhat,
    .out_valid(res_valid),
    .r,
    .sat      (res_sat)
  );

  rrg_window #(.N(N)) u_window (
    .clk, .rst,
    .push (res_valid),
    .r_in (r),
    .win,
    .fill,
    .full (window_full)
  );

  // the window is updated in the clock of res_valid; start one clock later
  always_ff @(posedge clk) begin
    if (rst) stats_start <= 1'b0;
    else     stats_start <= res_valid;
  end

  rrg_window_stats #(.N(N)) u_stats (
    .clk, .rst,
    .start(stats_start),
    .win,
    .busy (stats_busy),
    .done (stats_done),
    .stats
  );

  rrg_divider u_divider (
    .clk, .rst,
    .start(stats_done),
    .num  (stats.r_sq_sum),
    .den  (stats.r_var),
    .busy (div_busy),
    .done (div_done),
    .q    (div_q),
    .sat  (chi_sat)
  );

  rrg_threshold u_threshold (
    .clk, .rst,
    .in_valid (div_done),
    .tau      (div_q),
    .gamma,
    .out_valid(thr_valid),
    .alarm
  );

  assign out_valid = thr_valid;
  assign r_avg     = stats.r_avg;
  assign r_var     = stats.r_var;

  // chi_sq is registered alongside the alarm so that both change together
  always_ff @(posedge clk) begin
    if (rst)           chi_sq <= '0;
    else if (div_done) chi_sq <= div_q;
  end

  // sample counter and the busy flag of the sequential schedule
  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      count <= '0;
    end else begin
      if (take) begin
        busy <= 1'b1;
        if (count != '1) count <= count + 1'b1;
      end else if (thr_valid) begin
        busy <= 1'b0;
      end
    end
  end

  // the window must not move while the statistics loop reads it
  assert property (@(posedge clk) disable iff (rst) stats_busy |-> !res_valid);
  // one sample in flight at a time
  assert property (@(posedge clk) disable iff (rst) (stats_busy || div_busy) |-> !take);

endmodule
