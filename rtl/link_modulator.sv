// link_modulator -- per-link propagation effects applied to a node output:
//
//   y(t) = C * exp(-j*phi(t)) * y'(t),   phi(t) = phi0 + t * dphi
//
// C is the path loss of the link and phi the Doppler phase,
// 2*pi*f_c*(v_r/c)*(t - tau), with v_r the radial relative velocity. The
// scenario host turns geometry into three numbers per link and update period:
// the path loss (mantissa Q1.16 and an extra right shift, C = mant*2^-(16+sh)),
// the phase step per sample dphi and the phase phi0 of the first sample of the
// period, both as 32-bit fractions of a full turn. They are captured on
// `load`, which must come with the first sample of a new period, so a sample
// is always treated with one period's numbers.
//
// The phase accumulator advances once per sample. exp(-j*phi) comes from a
// 1024-entry cosine/sine table (phase rounded to 10 bits, Q1.15 amplitude)
// built at elaboration by repeated rotation in integer arithmetic; no
// real-number maths is needed. Table size and number formats are this
// design's choices.
//
// Timing: y/y_valid follow y_in/in_valid by 2 clocks (rotation, scaling).
module link_modulator
  import dp_pkg::*;
#(
  parameter int unsigned LUT_AW = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               load,      // first sample of a new update period
  input  cplx_t              y_in,
  input  logic [PL_W-1:0]    pl_mant,
  input  logic [PL_SH_W-1:0] pl_shift,
  input  logic [31:0]        dop_inc,
  input  logic [31:0]        dop_ph0,
  output logic               y_valid,
  output cplx_t              y
);

  localparam int unsigned LUT_N = 2**LUT_AW;

  typedef logic signed [15:0] trig_t;
  typedef trig_t lut_t [LUT_N];

  // cos/sin of 2*pi*a/LUT_N by successive rotation of (2^30, 0) by
  // 2*pi/LUT_N, carried in Q2.30 and rounded to Q1.15 (+1 saturated).
  function automatic lut_t make_lut(input bit want_sin);
    lut_t t;
    logic signed [63:0] c, s, cn, sn, cd, sd, v;
    // rotation constants for LUT_N = 1024, Q2.30
    cd = 64'sd1073721611;
    sd = 64'sd6588356;
    c  = 64'sd1 <<< 30;
    s  = 64'sd0;
    for (int a = 0; a < LUT_N; a++) begin
      v = want_sin ? s : c;
      v = (v + (64'sd1 <<< 14)) >>> 15;
      if (v > 64'sd32767) v = 64'sd32767;
      t[a] = trig_t'(v);
      cn = (c * cd - s * sd + (64'sd1 <<< 29)) >>> 30;
      sn = (s * cd + c * sd + (64'sd1 <<< 29)) >>> 30;
      c  = cn;
      s  = sn;
    end
    return t;
  endfunction

  localparam lut_t COS_LUT = make_lut(1'b0);
  localparam lut_t SIN_LUT = make_lut(1'b1);

  // Held link numbers.
  logic [PL_W-1:0]    pl_mant_q;
  logic [PL_SH_W-1:0] pl_shift_q;
  logic [31:0]        inc_q;
  logic [31:0]        phase;

  logic [31:0]        ph_now;    // phase of the sample at the input
  assign ph_now = load ? dop_ph0 : phase;

  logic [LUT_AW-1:0]  idx;
  // rounded to the table: top LUT_AW bits plus the next bit, modulo a turn
  assign idx    = ph_now[31 -: LUT_AW] + LUT_AW'(ph_now[31 - LUT_AW]);

  logic               v1;
  cplx_t              rot;
  logic [PL_W-1:0]    pl_mant_1;   // path loss travelling with the sample
  logic [PL_SH_W-1:0] pl_shift_1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pl_mant_q  <= '0;
      pl_shift_q <= '0;
      inc_q      <= '0;
      phase      <= '0;
      v1         <= 1'b0;
      rot        <= '0;
      pl_mant_1  <= '0;
      pl_shift_1 <= '0;
      y_valid    <= 1'b0;
      y          <= '0;
    end else begin
      if (load) begin
        pl_mant_q  <= pl_mant;
        pl_shift_q <= pl_shift;
        inc_q      <= dop_inc;
      end
      if (in_valid) phase <= ph_now + (load ? dop_inc : inc_q);
      else if (load) phase <= dop_ph0;

      // stage 1: multiply by exp(-j*phi) = cos(phi) - j sin(phi)
      v1 <= in_valid;
      if (in_valid) begin
        logic signed [63:0] c, s;
        pl_mant_1  <= load ? pl_mant  : pl_mant_q;
        pl_shift_1 <= load ? pl_shift : pl_shift_q;
        c = 64'(COS_LUT[idx]);
        s = 64'(SIN_LUT[idx]);
        rot.re <= sat_smp(rshift_round(64'(y_in.re) * c + 64'(y_in.im) * s, 15));
        rot.im <= sat_smp(rshift_round(64'(y_in.im) * c - 64'(y_in.re) * s, 15));
      end

      // stage 2: path loss
      y_valid <= v1;
      if (v1) begin
        logic signed [63:0] m;
        m = 64'(pl_mant_1);
        y.re <= sat_smp(rshift_round(64'(rot.re) * m, 16 + int'(pl_shift_1)));
        y.im <= sat_smp(rshift_round(64'(rot.im) * m, 16 + int'(pl_shift_1)));
      end
    end
  end

endmodule
