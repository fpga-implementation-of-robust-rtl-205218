// rrg_divider: chi-squared test statistic tau = r_sq_sum / r_var.
//
// Both operands carry 6 fractional bits, so with integer codes a (u17.6)
// and b (u12.6) the statistic code is  q = floor(a * 2^6 / b), which is
// saturated to the u17.6 Chi_sq type.  The quotient is formed by a
// restoring shift-subtract divider, one quotient bit per clock, most
// significant bit first.  Before the loop, a quotient that would not fit in
// CHI_W bits (including b = 0, a window with no spread) is detected with
// one compare and the all-ones maximum is returned at once.
// The statistic and its format follow the paper; the divider structure,
// floor rounding and saturation are this design's choices.
//
// Interface: pulse start with num/den; busy until done; done pulses with q
// and sat (set when q was clipped).  q holds until the next done.
// Latency: done rises Q_W + 1 clocks after the start clock (1 clock when
// saturated); busy is high during the Q_W loop clocks.
module rrg_divider
  import rrg_pkg::*;
#(
  parameter int unsigned NUM_W = RSQS_W,   // dividend word length
  parameter int unsigned DEN_W = RVAR_W,   // divisor word length
  parameter int unsigned Q_W   = CHI_W,    // quotient word length
  parameter int unsigned F     = FL        // fractional bits of the operands
)(
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [Q_W-1:0]   q,
  output logic             sat
);

  localparam int D_W = NUM_W + F;          // scaled dividend a * 2^F
  localparam int P_W = D_W + Q_W + 1;      // wide enough for the compare

  typedef enum logic {S_IDLE, S_RUN} state_t;

  state_t              state;
  logic [D_W-1:0]      dividend;
  logic [DEN_W-1:0]    divisor;
  logic [D_W-1:0]      rem;                // partial remainder
  logic [Q_W-1:0]      quo;
  localparam int BITS_W = $clog2(Q_W + 1);
  logic [BITS_W-1:0]   bitno;
  logic                qbit;

  logic [P_W-1:0]      scaled_num, limit;
  logic                overflow;
  logic [D_W:0]        trial;
  logic [D_W:0]        rem_shift;

  always_comb begin
    scaled_num = P_W'({num, F'(0)});
    limit      = P_W'(den) << Q_W;         // q >= 2^Q_W  <=>  a*2^F >= b*2^Q_W
    overflow   = (scaled_num >= limit);
    rem_shift  = {rem[D_W-1:0], dividend[D_W-1]};
    trial      = rem_shift - (D_W+1)'(divisor);
    qbit       = ~trial[D_W];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      dividend <= '0;
      divisor  <= '0;
      rem      <= '0;
      quo      <= '0;
      bitno    <= '0;
      done     <= 1'b0;
      q        <= '0;
      sat      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          sat <= overflow;
          if (overflow) begin
            q    <= '1;
            done <= 1'b1;
          end else begin
            // quotient < 2^Q_W, so only the last Q_W steps of the long
            // division can produce a one; start with the top bits loaded.
            rem      <= D_W'({num, F'(0)} >> Q_W);
            dividend <= D_W'({num, F'(0)} << (D_W - Q_W));
            divisor  <= den;
            quo      <= '0;
            bitno    <= '0;
            state    <= S_RUN;
          end
        end
        S_RUN: begin
          rem      <= qbit ? trial[D_W-1:0] : rem_shift[D_W-1:0];
          quo      <= {quo[Q_W-2:0], qbit};
          dividend <= dividend << 1;
          bitno    <= bitno + 1'b1;
          if (bitno == BITS_W'(Q_W - 1)) begin
            q     <= {quo[Q_W-2:0], qbit};
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
