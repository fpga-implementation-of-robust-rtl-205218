// rrg_pkg: fixed-point types shared by the robust residual generator.
//
// Every quantity of the datapath has its own two's-complement or unsigned
// fixed-point type.  All of them carry FL = 6 fractional bits; the word
// lengths and signedness are the ones chosen for this datapath so that the
// false-alarm rate of the chi-squared test stays below 0.5 % (word length W,
// fractional length 6, written sW.6 or uW.6 below).  Values are stored as
// plain integers scaled by 2^6.
//
// The rounding rule for every narrowing step is floor (drop the low bits),
// and every narrowing step saturates at the limits of the target type; both
// are this design's choice.
package rrg_pkg;

  localparam int FL = 6;             // common fractional length

  localparam int YM_W    = 12;       // ym                : s12.6
  localparam int U_W     = 2;        // u                 : u2.0
  localparam int DHAT_W  = 8;        // dhat              : u8.6
  localparam int R_W     = 12;       // r                 : s12.6
  localparam int RSQ_W   = 17;       // r_sq              : u17.6
  localparam int RSQS_W  = 17;       // r_sq_sum          : u17.6
  localparam int RSUM_W  = 14;       // r_sum             : s14.6
  localparam int RAVG_W  = 11;       // r_avg             : s11.6
  localparam int RDEV_W  = 11;       // r_sub_ravg        : s11.6
  localparam int RDSQ_W  = 14;       // r_sub_ravg_sq     : u14.6
  localparam int RDSQS_W = 15;       // r_sub_ravg_sq_sum : u15.6
  localparam int RVAR_W  = 12;       // r_var             : u12.6
  localparam int CHI_W   = 17;       // Chi_sq            : u17.6
  localparam int CNT_W   = 11;       // count             : u11.0

  typedef logic signed [YM_W-1:0]    ym_t;
  typedef logic        [U_W-1:0]     u_t;
  typedef logic        [DHAT_W-1:0]  dhat_t;
  typedef logic signed [R_W-1:0]     r_t;
  typedef logic        [RSQS_W-1:0]  rsqs_t;
  typedef logic signed [RSUM_W-1:0]  rsum_t;
  typedef logic signed [RAVG_W-1:0]  ravg_t;
  typedef logic        [RDSQS_W-1:0] rdsqs_t;
  typedef logic        [RVAR_W-1:0]  rvar_t;
  typedef logic        [CHI_W-1:0]   chi_t;
  typedef logic        [CNT_W-1:0]   count_t;

  // Window statistics handed from the statistics unit to the divider.
  typedef struct packed {
    rsum_t  r_sum;
    ravg_t  r_avg;
    rsqs_t  r_sq_sum;
    rdsqs_t r_sub_ravg_sq_sum;
    rvar_t  r_var;
  } stats_t;

endpackage
