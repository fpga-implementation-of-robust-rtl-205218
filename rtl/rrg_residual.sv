// rrg_residual: residual of the identified static-gain model.
//
// For the plant y(k) = d*u(k) + e(k), the residual is the measured output
// minus the output predicted with the identified gain:
//     r(k) = ym(k) - dhat * u(k)
// ym is s12.6, u is u2.0 and dhat is u8.6, so dhat*u is an exact u10.6 and
// the difference is an exact s13.6; it is then saturated to the s12.6 type
// of r (with dhat*u >= 0 only the negative limit can actually be reached).  The formula and the formats follow the paper; the saturation and
// the register stage are this design's choice.
//
// Interface: in_valid with ym/u/dhat; one clock later out_valid with r and
// sat (set when r was clipped).  Synchronous active-high reset.
module rrg_residual
  import rrg_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  ym_t   ym,
  input  u_t    u,
  input  dhat_t dhat,
  output logic  out_valid,
  output r_t    r,
  output logic  sat
);

  localparam logic signed [R_W:0] RMAX = (R_W+1)'(2**(R_W-1) - 1);
  localparam logic signed [R_W:0] RMIN = -(R_W+1)'(2**(R_W-1));

  logic        [DHAT_W+U_W-1:0] prod;   // u10.6
  logic signed [R_W:0]          diff;   // s13.6
  r_t                           r_next;
  logic                         sat_next;

  always_comb begin
    prod = dhat * u;
    diff = $signed({ym[YM_W-1], ym}) - $signed({{(R_W+1-DHAT_W-U_W){1'b0}}, prod});
    sat_next = 1'b0;
    if (diff > RMAX) begin
      r_next   = r_t'(RMAX);
      sat_next = 1'b1;
    end else if (diff < RMIN) begin
      r_next   = r_t'(RMIN);
      sat_next = 1'b1;
    end else begin
      r_next = r_t'(diff);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      r         <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        r   <= r_next;
        sat <= sat_next;
      end
    end
  end

endmodule
