// tb_output_former -- drives K intermediate signals and a transmit signal
// with random data, random output weights, transmit gains, link delays and
// signed scatterer offsets (changed every 200 samples), and checks
//   y'_l(t) = G_l s_tx(t - tau_l) + sum_k beta_{l,k} v_k(t - tau_l + tau_{k,l} + TAU_BIAS)
// in real arithmetic for every l != SELF, a zero output for l = SELF, and
// the 3-clock latency.
// Runs with K = 2, SELF = 1 and a 1024-sample long buffer instead of 2^23,
// with link delays of 150 to 900 samples.
module tb_output_former;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 3, K = 2, SELF = 1, DEPTH = 1024;
  localparam int T = 1500;
  localparam int NIN = K + 1;        // stream K is the transmit signal

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  in_valid;
  cplx_t v       [K];
  cplx_t s_tx;
  cwgt_t beta    [N][K];
  tau_t  tau_sc  [N][K];
  cwgt_t gtx     [N];
  tau_t  tau_out [N];
  logic  y_valid;
  cplx_t y       [N];

  output_former #(.N(N), .K(K), .SELF(SELF), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  cplx_t hist [NIN][T];
  rc_t   exp_arr [T][N];
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
    if (rst_n && y_valid) begin
      for (int l = 0; l < N; l++) begin
        checks++;
        if (n_got >= n_exp || !close(y[l], exp_arr[n_got][l], 2.0)) begin
          failures++;
          if (failures < 10) $display("t=%0d l=%0d got %0d,%0d exp %f,%f", n_got, l, y[l].re, y[l].im,
                                      exp_arr[n_got][l].re, exp_arr[n_got][l].im);
        end
      end
      n_got <= n_got + 1;
    end
  end

  initial begin
    int cyc;
    in_valid = 1'b0;
    s_tx = '0;
    for (int k = 0; k < K; k++) v[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < T; t++) begin
      if (t % 200 == 0) begin
        for (int l = 0; l < N; l++) begin
          gtx[l]     = rand_wgt(6000);
          tau_out[l] = tau_t'($urandom_range(900 << FRAC_W, 150 << FRAC_W));
          for (int k = 0; k < K; k++) begin
            beta[l][k]   = rand_wgt(6000);
            tau_sc[l][k] = tau_t'($signed($urandom_range(80 << FRAC_W, 0)) - (40 << FRAC_W));
          end
        end
      end
      for (int k = 0; k < K; k++) begin
        v[k] = rand_smp(10000);
        hist[k][t] = v[k];
      end
      s_tx = rand_smp(10000);
      hist[K][t] = s_tx;
      for (int l = 0; l < N; l++) begin
        rc_t e;
        real to;
        to = real'(tau_out[l]) / real'(2 ** FRAC_W);
        e  = rc(0.0, 0.0);
        if (l != SELF) begin
          e = rc_mul(w_rc(gtx[l]), interp_at(K, t, to));
          for (int k = 0; k < K; k++)
            e = rc_add(e, rc_mul(w_rc(beta[l][k]),
                  interp_at(k, t, to - real'($signed(tau_sc[l][k])) / real'(2 ** FRAC_W) - real'(TAU_BIAS))));
        end
        exp_arr[n_exp][l] = e;
      end
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
    // last input taken at the next posedge; its output is counted one clock
    // after out_valid rises, i.e. 3 negedges later for a 3-clock latency
    checks++;
    if (cyc != 3) begin
      failures++;
      $display("latency check: %0d clocks, expected 3", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
