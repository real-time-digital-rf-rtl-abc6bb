// frac_interp -- 4-tap fractional-delay interpolation filter.
//
// Given four consecutive samples of a signal, newest first,
//   x[0] = x(t-n+1), x[1] = x(t-n), x[2] = x(t-n-1), x[3] = x(t-n-2),
// and a fractional delay mu = mu_i / 2^FRAC_W in [0,1), the filter returns an
// estimate of x(t-n-mu), i.e. the signal delayed by n+mu samples. Together with
// an integer read offset this applies an arbitrary fractional delay, which the
// direct-path model needs on every path (a 4-tap spline filter at 25%
// oversampling is the configuration the model is evaluated with).
//
// The coefficients are those of the piecewise-parabolic (quadratic spline)
// Farrow interpolator with free parameter 1/2, computed from mu on the fly:
//   h(-1) = h(2) = (mu^2 - mu)/2
//   h(0)  = 1 - mu/2 - mu^2/2
//   h(1)  = 3mu/2 - mu^2/2
// They sum to one, give x[1] exactly at mu=0 and tend to x[2] as mu -> 1.
// The particular spline (the paper names only "quadratic spline") is this
// design's choice. The I and Q parts are filtered with the same real taps.
//
// Timing: one register stage; y/y_valid follow x/in_valid by one clock.
// The output is rounded to nearest and saturated to 16 bits.
module frac_interp
  import dp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  cplx_t             x [TAPS],
  input  logic [FRAC_W-1:0] mu,
  output logic              y_valid,
  output cplx_t             y
);

  localparam int unsigned CSH = 2 * FRAC_W + 1;  // coefficient scale 2^CSH

  logic signed [63:0] h_m1, h_0, h_1;
  logic signed [63:0] acc_re, acc_im;

  always_comb begin
    logic signed [63:0] m, m2, mf;
    m    = 64'(mu);
    m2   = m * m;
    mf   = m <<< FRAC_W;
    h_m1 = m2 - mf;
    h_0  = (64'sd1 <<< CSH) - mf - m2;
    h_1  = 3 * mf - m2;
    acc_re = h_m1 * 64'(x[0].re) + h_0 * 64'(x[1].re) + h_1 * 64'(x[2].re) + h_m1 * 64'(x[3].re);
    acc_im = h_m1 * 64'(x[0].im) + h_0 * 64'(x[1].im) + h_1 * 64'(x[2].im) + h_m1 * 64'(x[3].im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y       <= '0;
    end else begin
      y_valid <= in_valid;
      if (in_valid) begin
        y.re <= sat_smp(rshift_round(acc_re, CSH));
        y.im <= sat_smp(rshift_round(acc_im, CSH));
      end
    end
  end

endmodule
