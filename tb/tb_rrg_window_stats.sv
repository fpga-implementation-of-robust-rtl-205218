// tb_rrg_window_stats: self-checking test of the window statistics unit.
// Windows of small noise-like residuals, of large residuals that drive the
// sums and squares into saturation, and of constant residuals (zero
// variance) are compared field by field with integer reference arithmetic.
// The latency from start to done is checked to be 2*N + 3 clocks.
module tb_rrg_window_stats;
  import rrg_pkg::*;
  import tb_rrg_ref_pkg::*;

  localparam int N = 10;
  logic clk = 0, rst = 1, start = 0;
  r_t win [N];
  logic busy, done;
  stats_t stats;
  int checks = 0, failures = 0;

  rrg_window_stats #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int mode);
    longint rv [];
    ref_stats_t e;
    int lat;
    rv = new[N];
    for (int j = 0; j < N; j++) begin
      case (mode)
        0: rv[j] = longint'($urandom % 257) - 128;              // about +-2
        1: rv[j] = longint'($signed(12'($urandom)));            // full range
        2: rv[j] = 1000 + longint'($urandom % 40);              // large offset
        default: rv[j] = 77;                                    // constant
      endcase
      win[j] = r_t'(rv[j]);
    end
    e = ref_stats(rv, N);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2 * N + 3) begin failures++; $display("FAIL latency %0d", lat); end
    checks++;
    if (longint'(stats.r_sum) != e.r_sum || longint'(stats.r_avg) != e.r_avg ||
        longint'(stats.r_sq_sum) != e.r_sq_sum ||
        longint'(stats.r_sub_ravg_sq_sum) != e.dsq_sum || longint'(stats.r_var) != e.r_var) begin
      failures++;
      $display("FAIL mode %0d: sum %0d/%0d avg %0d/%0d sq %0d/%0d dsq %0d/%0d var %0d/%0d", mode,
               stats.r_sum, e.r_sum, stats.r_avg, e.r_avg, stats.r_sq_sum, e.r_sq_sum,
               stats.r_sub_ravg_sq_sum, e.dsq_sum, stats.r_var, e.r_var);
    end
  endtask

  initial begin
    for (int j = 0; j < N; j++) win[j] = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 400; k++) run(k % 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
