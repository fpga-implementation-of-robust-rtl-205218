// rrg_window_stats: mean, variance and energy of the residual window.
//
// Computes, over the N residuals of the window,
//     r_sum             = sum r(i)                       s14.6
//     r_sq_sum          = sum r(i)^2                     u17.6
//     r_avg             = r_sum / N                      s11.6
//     r_sub_ravg_sq_sum = sum (r(i) - r_avg)^2           u15.6
//     r_var             = r_sub_ravg_sq_sum / N          u12.6
// with the intermediate terms r_sq (u17.6), r_sub_ravg (s11.6) and
// r_sub_ravg_sq (u14.6).  The variable set, their formats and the division
// by N (not N-1) follow the paper's fixed-point variable list.
//
// How it works: two loops over an index i = 0..N-1, one window entry per
// clock, each with a single multiplier.  Loop 1 accumulates r_sum and
// r_sq_sum; one clock then forms r_avg; loop 2 accumulates the squared
// deviations; one clock forms r_var.  Accumulators are wider than their
// Table types and are saturated once, when the result is formed.  Each
// product is floored to 6 fractional bits and saturated to its type; the
// divisions by N floor.  The sequential loop structure, floor rounding and
// saturation are this design's choices.
//
// Interface: pulse start with win stable; win must stay stable until done.
// busy is high from the clock after start until done.  done pulses with
// stats valid (stats holds its value until the next done).
// Latency: 2*N + 3 clocks from the start clock to done.
module rrg_window_stats
  import rrg_pkg::*;
#(
  parameter int unsigned N = 10
)(
  input  logic   clk,
  input  logic   rst,
  input  logic   start,
  input  r_t     win [N],
  output logic   busy,
  output logic   done,
  output stats_t stats
);

  typedef enum logic [2:0] {S_IDLE, S_SUM, S_AVG, S_DEV, S_VAR} state_t;

  localparam int ACC_W = 24;                // wide accumulators, no overflow for N <= 127
  localparam int I_W   = $clog2(N + 1);     // loop index, u4.0 at N = 10

  state_t                   state;
  logic [I_W-1:0]           i;
  logic signed [ACC_W-1:0]  acc_sum;     // sum r      (frac 6)
  logic        [ACC_W-1:0]  acc_sq;      // sum r^2    (frac 6, floored)
  logic        [ACC_W-1:0]  acc_dsq;     // sum dev^2  (frac 6, floored)

  // current window entry and the terms formed from it
  r_t                       r_i;
  logic        [RSQ_W-1:0]  r_sq;            // u17.6
  logic signed [RDEV_W-1:0] r_sub_ravg;      // s11.6
  logic        [RDSQ_W-1:0] r_sub_ravg_sq;   // u14.6

  // results of the two end-of-loop steps
  logic signed [ACC_W-1:0]  avg_q;
  rsum_t                    r_sum_sat;
  rsqs_t                    r_sq_sum_sat;
  ravg_t                    r_avg_next;
  rdsqs_t                   dsq_sum_sat;
  rvar_t                    r_var_next;

  // floor(a / N) for a signed accumulator
  function automatic logic signed [ACC_W-1:0] floor_div_n(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] q;
    q = a / $signed(ACC_W'(N));
    if (a < 0 && q * $signed(ACC_W'(N)) != a) q = q - 1;
    return q;
  endfunction

  // saturate a signed accumulator to a W-bit signed value
  function automatic logic signed [ACC_W-1:0] sat_s(input logic signed [ACC_W-1:0] a, input int w);
    logic signed [ACC_W-1:0] hi, lo;
    hi = (ACC_W'(1) <<< (w-1)) - 1;
    lo = -(ACC_W'(1) <<< (w-1));
    if (a > hi) return hi;
    if (a < lo) return lo;
    return a;
  endfunction

  // saturate an unsigned accumulator to a W-bit unsigned value
  function automatic logic [ACC_W-1:0] sat_u(input logic [ACC_W-1:0] a, input int w);
    logic [ACC_W-1:0] hi;
    hi = (ACC_W'(1) << w) - 1;
    return (a > hi) ? hi : a;
  endfunction

  always_comb begin
    logic signed [2*R_W-1:0]    sq_full;
    logic signed [ACC_W-1:0]    dev_full;
    logic signed [2*RDEV_W-1:0] dsq_full;
    logic        [ACC_W-1:0]    sq_floor, dsq_floor;

    r_i = win[i];

    // loop 1 term: r^2, exact with 12 fractional bits, floored to 6
    sq_full  = r_i * r_i;
    sq_floor = ACC_W'(sq_full >>> FL);
    r_sq     = RSQ_W'(sat_u(sq_floor, RSQ_W));

    // loop 2 term: (r - r_avg), saturated to s11.6, squared, floored to 6
    dev_full      = ACC_W'(r_i) - ACC_W'(stats.r_avg);
    r_sub_ravg    = RDEV_W'(sat_s(dev_full, RDEV_W));
    dsq_full      = r_sub_ravg * r_sub_ravg;
    dsq_floor     = ACC_W'(dsq_full >>> FL);
    r_sub_ravg_sq = RDSQ_W'(sat_u(dsq_floor, RDSQ_W));

    // end of loop 1
    r_sum_sat    = RSUM_W'(sat_s(acc_sum, RSUM_W));
    r_sq_sum_sat = RSQS_W'(sat_u(acc_sq, RSQS_W));
    avg_q        = floor_div_n(ACC_W'(r_sum_sat));
    r_avg_next   = RAVG_W'(sat_s(avg_q, RAVG_W));

    // end of loop 2
    dsq_sum_sat  = RDSQS_W'(sat_u(acc_dsq, RDSQS_W));
    r_var_next   = RVAR_W'(sat_u(ACC_W'(dsq_sum_sat) / ACC_W'(N), RVAR_W));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      i       <= '0;
      acc_sum <= '0;
      acc_sq  <= '0;
      acc_dsq <= '0;
      done    <= 1'b0;
      stats   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_SUM;
          i       <= '0;
          acc_sum <= '0;
          acc_sq  <= '0;
          acc_dsq <= '0;
        end
        S_SUM: begin
          acc_sum <= acc_sum + ACC_W'(r_i);
          acc_sq  <= acc_sq + ACC_W'(r_sq);
          if (i == I_W'(N - 1)) state <= S_AVG;
          else                  i     <= i + 1'b1;
        end
        S_AVG: begin
          stats.r_sum    <= r_sum_sat;
          stats.r_sq_sum <= r_sq_sum_sat;
          stats.r_avg    <= r_avg_next;
          i              <= '0;
          state          <= S_DEV;
        end
        S_DEV: begin
          acc_dsq <= acc_dsq + ACC_W'(r_sub_ravg_sq);
          if (i == I_W'(N - 1)) state <= S_VAR;
          else                  i     <= i + 1'b1;
        end
        S_VAR: begin
          stats.r_sub_ravg_sq_sum <= dsq_sum_sat;
          stats.r_var             <= r_var_next;
          done                    <= 1'b1;
          state                   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  initial assert (N >= 2 && N <= 127) else $error("N out of range");

endmodule
