// rrg_window: detection window of the last N residuals.
//
// A shift register of N s12.6 residuals.  On push the new residual enters
// slot 0 and every older one moves up a slot; the oldest (slot N-1) is
// dropped, so win[0] is r(k) and win[N-1] is r(k-N+1).  fill counts the
// residuals received, saturating at N; full is set once the window holds N
// real samples.  Reset clears every slot to zero.
//
// The window length N = 10 is the one of the fixed-point design; holding the
// window as a shift register and clearing it on reset are this design's
// choices.  Timing: win and fill change one clock after push.
module rrg_window
  import rrg_pkg::*;
#(
  parameter int unsigned N = 10,
  localparam int I_W = $clog2(N + 1)  // 4 bits at N = 10 (u4.0)
)(
  input  logic               clk,
  input  logic               rst,
  input  logic               push,
  input  r_t                 r_in,
  output r_t                 win [N],
  output logic [I_W-1:0]     fill,
  output logic               full
);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int j = 0; j < N; j++) win[j] <= '0;
      fill <= '0;
    end else if (push) begin
      win[0] <= r_in;
      for (int j = 1; j < N; j++) win[j] <= win[j-1];
      if (fill != I_W'(N)) fill <= fill + 1'b1;
    end
  end

  assign full = (fill == I_W'(N));

endmodule
