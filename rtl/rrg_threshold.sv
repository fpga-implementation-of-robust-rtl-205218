// rrg_threshold: chi-squared fault test.
//
// Declares a fault when the test statistic exceeds the threshold:
//     alarm = tau(k) > gamma_alpha
// gamma_alpha is read from the chi-squared table for the wanted false-alarm
// rate alpha and (N-1) degrees of freedom; it is an input here, in the same
// u17.6 format as tau, so that it can be set without rebuilding.  The test
// follows the paper; the registered output and the threshold port are this
// design's choices.
//
// Interface: in_valid with tau; one clock later out_valid with alarm.
module rrg_threshold
  import rrg_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  chi_t tau,
  input  chi_t gamma,
  output logic out_valid,
  output logic alarm
);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      alarm     <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) alarm <= (tau > gamma);
    end
  end

endmodule
