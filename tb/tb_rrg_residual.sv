// tb_rrg_residual: self-checking test of the residual unit.
// Random ym/u/dhat codes plus the corner cases that saturate r; each result
// is compared with integer arithmetic one clock after in_valid.
module tb_rrg_residual;
  import rrg_pkg::*;
  import tb_rrg_ref_pkg::*;

  logic clk = 0, rst = 1, in_valid = 0;
  ym_t ym; u_t u; dhat_t dhat;
  logic out_valid, sat;
  r_t r;
  int checks = 0, failures = 0, nsat = 0;

  rrg_residual dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(longint y, longint uu, longint d);
    longint exp_r;
    exp_r = ref_residual(y, uu, d);
    @(negedge clk);
    ym = ym_t'(y); u = u_t'(uu); dhat = dhat_t'(d); in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || longint'(r) != exp_r || sat != (exp_r != y - d * uu)) begin
      failures++;
      $display("FAIL ym=%0d u=%0d dhat=%0d r=%0d exp=%0d sat=%0b valid=%0b", y, uu, d, r, exp_r, sat, out_valid);
    end
    if (sat) nsat++;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid held"); end
  endtask

  initial begin
    ym = '0; u = '0; dhat = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    // the operating point of the paper's example: dhat = 2.04, u = 2
    apply(4 * 64, 2, 131);          // ym = 4.0
    apply(-2048, 3, 255);           // most negative: saturates
    apply(2047, 0, 255);
    apply(-2048, 0, 0);
    apply(-1500, 3, 255);           // -1500 - 765 -> clips at -2048
    for (int k = 0; k < 2000; k++)
      apply(longint'($signed(12'($urandom))), longint'($urandom % 4), longint'($urandom % 256));
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
