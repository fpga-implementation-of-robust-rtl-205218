// tb_rrg_divider: self-checking test of the chi-squared divider.
// Random and corner-case operands (zero divisor, quotients just below and
// at the u17.6 limit) are compared with integer division; the latency is
// checked to be CHI_W + 1 clocks, or 1 clock for a saturated quotient.
module tb_rrg_divider;
  import rrg_pkg::*;
  import tb_rrg_ref_pkg::*;

  logic clk = 0, rst = 1, start = 0;
  rsqs_t num;
  rvar_t den;
  logic busy, done, sat;
  chi_t q;
  int checks = 0, failures = 0, nsat = 0;

  rrg_divider dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(longint a, longint b);
    longint e;
    int lat;
    bit esat;
    e = ref_chi(a, b);
    esat = (b == 0) || ((a * 64) / b > umax(17));
    @(negedge clk);
    num = rsqs_t'(a); den = rvar_t'(b); start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (longint'(q) != e || sat != esat) begin
      failures++;
      $display("FAIL %0d / %0d: q=%0d exp=%0d sat=%0b", a, b, q, e, sat);
    end
    checks++;
    if (lat != (esat ? 1 : CHI_W + 1)) begin
      failures++;
      $display("FAIL latency %0d for %0d / %0d", lat, a, b);
    end
    if (sat) nsat++;
  endtask

  initial begin
    num = '0; den = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    run(640, 64);          // 10.0 / 1.0
    run(0, 0);
    run(131071, 0);
    run(131071, 4095);
    run(131071, 63);       // just above the limit
    run(131071, 64);       // just below it
    run(2047 * 64, 64);    // exactly the largest code
    run(2048 * 64 - 1, 64);
    run(1, 4095);
    for (int k = 0; k < 3000; k++) begin
      if (k % 2 == 0) run(longint'($urandom % 131072), longint'($urandom % 4096));
      else            run(longint'($urandom % 4096), longint'(1 + $urandom % 200));
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
