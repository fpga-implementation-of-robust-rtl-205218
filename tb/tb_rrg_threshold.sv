// tb_rrg_threshold: self-checking test of the chi-squared threshold test.
// Random statistics and thresholds, including equal values (no alarm), are
// compared with tau > gamma one clock after in_valid.
module tb_rrg_threshold;
  import rrg_pkg::*;

  logic clk = 0, rst = 1, in_valid = 0;
  chi_t tau, gamma;
  logic out_valid, alarm;
  int checks = 0, failures = 0, nalarm = 0;

  rrg_threshold dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, g;
    tau = '0; gamma = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 2000; k++) begin
      g = 1510;                                  // 23.59 in u17.6
      case (k % 4)
        0: t = g;
        1: t = g + 1;
        2: t = g - 1;
        default: begin t = int'($urandom % 131072); g = int'($urandom % 131072); end
      endcase
      @(negedge clk);
      tau = chi_t'(t); gamma = chi_t'(g); in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || alarm != (t > g)) begin
        failures++;
        $display("FAIL tau=%0d gamma=%0d alarm=%0b valid=%0b", t, g, alarm, out_valid);
      end
      if (alarm) nalarm++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
