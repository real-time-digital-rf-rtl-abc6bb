// tb_frac_interp -- checks the 4-tap fractional-delay filter against the
// quadratic-spline formula evaluated in real arithmetic, its exactness at
// mu = 0, and its one-clock latency.
// Runs the module at its defaults (8-bit fraction). The spline formula the
// reference uses is the same one the design chose; the result must be the
// correctly rounded value (within half an LSB).
module tb_frac_interp;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              in_valid;
  cplx_t             x [TAPS];
  logic [FRAC_W-1:0] mu;
  logic              y_valid;
  cplx_t             y;

  int checks = 0, failures = 0;

  frac_interp dut (.clk, .rst_n, .in_valid, .x, .mu, .y_valid, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rc_t e;
    real m;
    in_valid = 1'b0;
    mu = '0;
    for (int j = 0; j < TAPS; j++) x[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int it = 0; it < 2000; it++) begin
      for (int j = 0; j < TAPS; j++) x[j] = rand_smp(it < 1000 ? 20000 : 32000);
      mu = (it % 10 == 0) ? '0 : FRAC_W'($urandom);
      in_valid = 1'b1;
      m = real'(mu) / real'(2 ** FRAC_W);
      e = rc(0.0, 0.0);
      for (int j = 0; j < TAPS; j++) e = rc_add(e, rc_scale(to_rc(x[j]), spline_tap(j, m)));
      if (e.re > 32767.0) e.re = 32767.0;
      if (e.re < -32768.0) e.re = -32768.0;
      if (e.im > 32767.0) e.im = 32767.0;
      if (e.im < -32768.0) e.im = -32768.0;
      @(posedge clk);
      #1;
      checks++;
      if (!y_valid || !close(y, e, 0.51)) begin
        failures++;
        if (failures < 10) $display("mismatch mu=%0d got %0d,%0d exp %f,%f", mu, y.re, y.im, e.re, e.im);
      end
      if (mu == '0) begin
        checks++;
        if (y != x[1]) failures++;
      end
    end
    in_valid = 1'b0;
    @(posedge clk);
    #1;
    checks++;
    if (y_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
