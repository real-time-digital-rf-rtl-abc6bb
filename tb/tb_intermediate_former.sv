// tb_intermediate_former -- drives three received signals with random data,
// random complex scattering weights and random signed scatterer offsets
// (changed every 50 samples), and checks each intermediate signal
//   v_k(t) = sum_{n != SELF} alpha_{k,n} s_n(t - tau_{n,k} - TAU_BIAS)
// computed in real arithmetic from the quadratic-spline interpolation, plus
// the 3-clock latency.
// Runs with N = 3, K = 3 and SELF = 1 (defaults N = 3, K = 16). The
// 64-sample bias of the signed offsets is this design's choice and is part
// of the expected result.
module tb_intermediate_former;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 3, K = 3, SELF = 1, DEPTH = 256;
  localparam int T = 700;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  in_valid;
  cplx_t s      [N];
  cwgt_t alpha  [K][N];
  tau_t  tau_in [K][N];
  logic  v_valid;
  cplx_t v      [K];

  intermediate_former #(.N(N), .K(K), .SELF(SELF), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  cplx_t hist [N][T];
  rc_t   exp_arr [T+1][K];
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

  // checker: outputs in input order
  always @(posedge clk) begin
    if (rst_n && v_valid) begin
      for (int k = 0; k < K; k++) begin
        checks++;
        if (n_got >= n_exp || !close(v[k], exp_arr[n_got][k], 2.0)) begin
          failures++;
          if (failures < 10) $display("k=%0d got %0d,%0d exp %f,%f", k, v[k].re, v[k].im,
                                      exp_arr[n_got][k].re, exp_arr[n_got][k].im);
        end
      end
      n_got <= n_got + 1;
    end
  end

  initial begin
    int cyc_in, cyc_out;
    in_valid = 1'b0;
    for (int n = 0; n < N; n++) s[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < T; t++) begin
      rc_t e [K];
      if (t % 50 == 0) begin
        for (int k = 0; k < K; k++)
          for (int n = 0; n < N; n++) begin
            alpha[k][n]  = rand_wgt(10000);
            tau_in[k][n] = tau_t'($signed($urandom_range(80 << FRAC_W, 0)) - (40 << FRAC_W));
          end
      end
      for (int n = 0; n < N; n++) begin
        s[n] = rand_smp(12000);
        hist[n][t] = s[n];
      end
      for (int k = 0; k < K; k++) begin
        e[k] = rc(0.0, 0.0);
        for (int n = 0; n < N; n++)
          if (n != SELF) begin
            real dly;
            dly  = real'($signed(tau_in[k][n])) / real'(2 ** FRAC_W) + real'(TAU_BIAS);
            e[k] = rc_add(e[k], rc_mul(w_rc(alpha[k][n]), interp_at(n, t, dly)));
          end
      end
      exp_arr[n_exp] = e;
      n_exp++;
      in_valid = 1'b1;
      @(negedge clk);
    end
    in_valid = 1'b0;
    // latency: one isolated sample
    @(negedge clk);
    cyc_in = 0;
    repeat (10) @(negedge clk);
    begin
      rc_t e [K];
      for (int n = 0; n < N; n++) s[n] = '0;
      for (int k = 0; k < K; k++) e[k] = rc(0.0, 0.0);
      for (int k = 0; k < K; k++) begin
        for (int n = 0; n < N; n++)
          if (n != SELF) begin
            real dly;
            dly  = real'($signed(tau_in[k][n])) / real'(2 ** FRAC_W) + real'(TAU_BIAS);
            e[k] = rc_add(e[k], rc_mul(w_rc(alpha[k][n]), interp_shift(n, dly)));
          end
      end
      exp_arr[n_exp] = e;
      n_exp++;
    end
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    cyc_out = 1;
    while (!v_valid) begin
      @(negedge clk);
      cyc_out++;
    end
    checks++;
    if (cyc_out != 3) begin
      failures++;
      $display("latency %0d, expected 3", cyc_out);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (n_got != n_exp) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // value of the delayed signal for one extra all-zero sample after the run
  function automatic rc_t interp_shift(input int n, input real dly);
    int   ni;
    real  mu;
    rc_t  acc;
    ni  = $floor(dly);
    mu  = dly - ni;
    acc = rc(0.0, 0.0);
    for (int j = 0; j < TAPS; j++) begin
      int ti;
      ti = T - ni + 1 - j;   // sample T is the extra zero sample
      if (ti >= 0 && ti < T) acc = rc_add(acc, rc_scale(to_rc(hist[n][ti]), spline_tap(j, mu)));
    end
    return acc;
  endfunction
endmodule
