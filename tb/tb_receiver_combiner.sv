// tb_receiver_combiner -- drives three received signals with random data,
// random receive gains and signed receiver offsets (changed every 40
// samples) and checks
//   r(t) = sum_{n != SELF} Grx_n s_n(t - tau_{n,r} - TAU_BIAS)
// in real arithmetic, and that the node's own input has no effect.
// Runs at the default sizes with SELF = 2; the 64-sample bias is this
// design's choice and part of the expected result.
module tb_receiver_combiner;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 3, SELF = 2, DEPTH = 256;
  localparam int T = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  in_valid;
  cplx_t s      [N];
  cwgt_t grx    [N];
  tau_t  tau_rx [N];
  logic  r_valid;
  cplx_t r;

  receiver_combiner #(.N(N), .SELF(SELF), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  cplx_t hist [N][T];
  rc_t   exp_arr [T];
  int    n_exp = 0, n_got = 0;

  function automatic rc_t interp_at(input int n, input int t, input real dly);
    int   ni;
    real  mu;
    rc_t  acc;
    ni  = $floor(dly);
    mu  = dly - ni;
    acc = rc(0.0, 0.0);
    for (int j = 0; j < TAPS; j++) begin
      int ti;
      ti = t - ni + 1 - j;
      if (ti >= 0 && ti <= t) acc = rc_add(acc, rc_scale(to_rc(hist[n][ti]), spline_tap(j, mu)));
    end
    return acc;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && r_valid) begin
      checks++;
      if (n_got >= n_exp || !close(r, exp_arr[n_got], 2.0)) begin
        failures++;
        if (failures < 10) $display("t=%0d got %0d,%0d exp %f,%f", n_got, r.re, r.im,
                                    exp_arr[n_got].re, exp_arr[n_got].im);
      end
      n_got <= n_got + 1;
    end
  end

  initial begin
    int cyc;
    in_valid = 1'b0;
    for (int n = 0; n < N; n++) s[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < T; t++) begin
      rc_t e;
      if (t % 40 == 0) begin
        for (int n = 0; n < N; n++) begin
          grx[n]    = rand_wgt(10000);
          tau_rx[n] = tau_t'($signed($urandom_range(100 << FRAC_W, 0)) - (50 << FRAC_W));
        end
      end
      for (int n = 0; n < N; n++) begin
        // the own input carries full-scale data that must not appear
        s[n] = rand_smp(n == SELF ? 32000 : 12000);
        hist[n][t] = s[n];
      end
      e = rc(0.0, 0.0);
      for (int n = 0; n < N; n++)
        if (n != SELF)
          e = rc_add(e, rc_mul(w_rc(grx[n]),
                interp_at(n, t, real'($signed(tau_rx[n])) / real'(2 ** FRAC_W) + real'(TAU_BIAS))));
      exp_arr[n_exp] = e;
      n_exp++;
      in_valid = 1'b1;
      @(negedge clk);
    end
    in_valid = 1'b0;
    cyc = 0;
    while (n_got != n_exp && cyc < 10) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 3) begin
      failures++;
      $display("latency check: %0d clocks, expected 3", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
