// dp_pkg -- types, constants and arithmetic helpers shared by the direct-path
// RF emulator node.
//
// Signals are complex baseband samples with 16-bit two's-complement I and Q
// (full scale +/-1). Complex weights (alpha, beta, antenna gain G) are 16-bit
// I/Q in Q2.14 (range +/-2). Delays are unsigned fixed point in units of one
// sample period with FRAC_W fractional bits. All of these widths are choices
// of this design; the model only requires complex samples, complex weights
// and fractional delays.
package dp_pkg;

  localparam int unsigned SAMPLE_W = 16;  // I or Q width of a signal sample
  localparam int unsigned WEIGHT_W = 16;  // I or Q width of a complex weight
  localparam int unsigned WFRAC    = 14;  // fractional bits of a weight (Q2.14)
  localparam int unsigned FRAC_W   = 8;   // fractional bits of a delay
  localparam int unsigned TAPS     = 4;   // taps of the fractional-delay filter (R)
  localparam int unsigned PL_W     = 17;  // path-loss mantissa width (Q1.16)
  localparam int unsigned PL_SH_W  = 5;   // path-loss extra right-shift width

  // Scatterer and receiver offsets (tau_{n,k}, tau_{k,l}, tau_{n,r}) are
  // signed: a scatterer may lie in front of or behind the object's phase
  // centre. The input side adds TAU_BIAS samples to make them causal and the
  // output side takes the same amount off the long link delay again.
  localparam int unsigned TAU_BIAS = 64;

  typedef logic signed [SAMPLE_W-1:0] smp_t;
  typedef logic signed [WEIGHT_W-1:0] wgt_t;

  typedef struct packed {
    smp_t re;
    smp_t im;
  } cplx_t;

  typedef struct packed {
    wgt_t re;
    wgt_t im;
  } cwgt_t;

  // Parameter tables of a node (see param_bank). The host writes one entry at
  // a time; row/col meaning is given per table.
  typedef enum logic [3:0] {
    T_ALPHA    = 4'd0,   // [k][n]  input scattering weight alpha_{m,k}(theta_n^i), cwgt_t
    T_TAU_IN   = 4'd1,   // [k][n]  scatterer input offset tau_{n,k}, signed samples
    T_BETA     = 4'd2,   // [l][k]  output scattering weight beta_{m,k}(theta_l^o), cwgt_t
    T_TAU_SC   = 4'd3,   // [l][k]  scatterer output offset tau_{k,l}, signed samples
    T_GTX      = 4'd4,   // [l]     transmit gain G_m(theta^s, theta_l^o), cwgt_t
    T_TAU_OUT  = 4'd5,   // [l]     link delay tau_{m,l}, samples
    T_GRX      = 4'd6,   // [n]     receive gain G_m(theta^s, theta_n^i), cwgt_t
    T_TAU_RX   = 4'd7,   // [n]     receiver offset tau_{n,r}, signed samples
    T_PL       = 4'd8,   // [l]     path loss: [16:0] mantissa (Q1.16), [21:17] extra right shift
    T_DOP_INC  = 4'd9,   // [l]     Doppler phase step per sample (2^32 = one cycle)
    T_DOP_PH0  = 4'd10   // [l]     Doppler phase at the start of an update period
  } ptable_e;

  // All delays in the parameter tables are 32-bit fixed point, FRAC_W
  // fractional bits (unsigned for tau_{m,l}, signed for the offsets).
  typedef logic [31:0] tau_t;

  // Signed offset plus bias, clamped into an unsigned delay of DW bits with a
  // minimum of one sample (the smallest delay a sample_buffer serves).
  function automatic logic [63:0] clamp_delay(input logic signed [63:0] v, input int unsigned dw);
    logic signed [63:0] lo, hi;
    lo = 64'sd1 <<< FRAC_W;
    hi = (64'sd1 <<< dw) - 64'sd1;
    if (v < lo)      return 64'(lo);
    else if (v > hi) return 64'(hi);
    else             return 64'(v);
  endfunction

  // Saturate a wide signed value to a SAMPLE_W-bit sample.
  function automatic smp_t sat_smp(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = 64'sd32767;
    localparam logic signed [63:0] MINV = -64'sd32768;
    if (v > MAXV)      return smp_t'(MAXV);
    else if (v < MINV) return smp_t'(MINV);
    else               return smp_t'(v);
  endfunction

  // Arithmetic right shift by sh with round-half-up.
  function automatic logic signed [63:0] rshift_round(input logic signed [63:0] v,
                                                      input int unsigned sh);
    if (sh == 0) return v;
    return (v + (64'sd1 <<< (sh - 1))) >>> sh;
  endfunction

  // Complex product of a sample and a Q2.14 weight; result still has WFRAC
  // fractional bits to keep (caller accumulates, then rounds).
  function automatic logic signed [63:0] cmul_re(input cplx_t x, input cwgt_t w);
    return 64'(x.re) * 64'(w.re) - 64'(x.im) * 64'(w.im);
  endfunction
  function automatic logic signed [63:0] cmul_im(input cplx_t x, input cwgt_t w);
    return 64'(x.re) * 64'(w.im) + 64'(x.im) * 64'(w.re);
  endfunction

endpackage
