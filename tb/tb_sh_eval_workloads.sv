// tb_sh_eval_workloads -- the spherical-harmonic evaluator at its default
// sizes (P_MAX = 256, 16,384 coefficient words) on the two angular models the
// emulator is meant to hold:
//
//   1. a steered 13x13 planar array, G(theta^s, theta) of rank D = 169 with
//      P = 16 basis functions per factor (2PD = 5,408 coefficients), evaluated
//      for several steering directions (PAIR form, 2DP+2 = 5,410 clocks each);
//   2. an anisotropic scatterer of K = 16 points with order-15 expansions
//      (P = 256) for the incoming and outgoing responses (2KP = 8,192
//      coefficients), all alpha_k and beta_k at one angle pair (SINGLE form,
//      P+2 = 258 clocks each).
//
// The coefficients and basis values are random stand-ins of realistic
// magnitude (a real fit would supply them); each result is compared with the
// same sum in real arithmetic, and every evaluation's cycle count, ready
// handshake and destination fields are checked.
module tb_sh_eval_workloads;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned P_MAX = 256, COEF_DEPTH = 16384;
  localparam int unsigned PW = $clog2(P_MAX + 1), CAW = $clog2(COEF_DEPTH);
  localparam int DA = 169, PA = 16, KS = 16, PS = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           coef_we;
  logic [CAW-1:0] coef_addr;
  cwgt_t          coef_data;
  logic           psi_we, psi_sel;
  logic [PW-1:0]  psi_idx;
  cwgt_t          psi_data;
  logic           cmd_valid, cmd_ready, cmd_pair;
  logic [PW-1:0]  cmd_p;
  logic [15:0]    cmd_d;
  logic [CAW-1:0] cmd_base;
  ptable_e        cmd_table;
  logic [7:0]     cmd_row, cmd_col;
  logic           res_valid;
  ptable_e        res_table;
  logic [7:0]     res_row, res_col;
  logic [31:0]    res_data;

  sh_eval dut (.*);

  int checks = 0, failures = 0;
  int n_pair = 0, n_single = 0;
  cwgt_t m_coef [COEF_DEPTH];
  cwgt_t m_psi  [2][P_MAX];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic rc_t dot(input int sel, input int base, input int p);
    rc_t acc;
    acc = rc(0.0, 0.0);
    for (int i = 0; i < p; i++) acc = rc_add(acc, rc_mul(w_rc(m_psi[sel][i]), w_rc(m_coef[base + i])));
    return acc;
  endfunction

  function automatic rc_t q14(input rc_t v);
    return rc($floor(v.re * 16384.0 + 0.5) / 16384.0, $floor(v.im * 16384.0 + 0.5) / 16384.0);
  endfunction

  task automatic load_coef(input int base, input int cnt, input int amp);
    for (int a = base; a < base + cnt; a++) begin
      @(negedge clk);
      coef_we = 1; coef_addr = CAW'(a); coef_data = rand_wgt(amp); m_coef[a] = coef_data;
    end
    @(negedge clk);
    coef_we = 0;
  endtask

  task automatic load_psi(input int sel, input int p, input int amp);
    for (int i = 0; i < p; i++) begin
      @(negedge clk);
      psi_we = 1; psi_sel = sel[0]; psi_idx = PW'(i); psi_data = rand_wgt(amp); m_psi[sel][i] = psi_data;
    end
    @(negedge clk);
    psi_we = 0;
  endtask

  task automatic run(input bit pair, input int p, input int d, input int base, input ptable_e tb,
                     input int row, input int col);
    rc_t   e;
    int    cyc;
    cwgt_t g;
    if (!pair) e = dot(0, base, p);
    else begin
      e = rc(0.0, 0.0);
      for (int i = 0; i < d; i++) begin
        rc_t a, gg;
        a  = q14(dot(1, base + 2 * i * p, p));
        gg = q14(dot(0, base + (2 * i + 1) * p, p));
        e  = rc_add(e, rc_mul(rc(a.re, -a.im), gg));
      end
    end
    e = rc_scale(e, 16384.0);
    @(negedge clk);
    checks++;
    if (!cmd_ready) failures++;
    cmd_valid = 1'b1; cmd_pair = pair; cmd_p = PW'(p); cmd_d = 16'(d);
    cmd_base = CAW'(base); cmd_table = tb; cmd_row = 8'(row); cmd_col = 8'(col);
    @(negedge clk);
    cmd_valid = 1'b0;
    cyc = 1;
    while (!res_valid && cyc < 20000) begin
      @(negedge clk);
      cyc++;
    end
    g = cwgt_t'(res_data);
    checks++;
    if (cyc != (pair ? 2 * d * p + 2 : p + 2)) begin
      failures++;
      $display("cycles %0d for pair=%0d p=%0d d=%0d", cyc, pair, p, d);
    end
    checks++;
    if (res_table != tb || res_row != 8'(row) || res_col != 8'(col)) failures++;
    checks++;
    if (!close(cplx_t'(g), e, 0.51)) begin
      failures++;
      $display("pair=%0d got %0d,%0d exp %f,%f", pair, g.re, g.im, e.re, e.im);
    end
    if (pair) n_pair++; else n_single++;
  endtask

  initial begin
    coef_we = 0; psi_we = 0; cmd_valid = 0; coef_addr = '0; coef_data = '0;
    psi_sel = 0; psi_idx = '0; psi_data = '0; cmd_pair = 0; cmd_p = '0; cmd_d = '0;
    cmd_base = '0; cmd_table = T_ALPHA; cmd_row = '0; cmd_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. steered 13x13 array: D = 169, P = 16, at coefficient base 0
    load_coef(0, 2 * PA * DA, 2000);
    load_psi(0, PA, 4000);                       // psi(theta) towards the receiver
    for (int s = 0; s < 4; s++) begin
      load_psi(1, PA, 4000);                     // psi(theta^s) of a new steering
      run(1'b1, PA, DA, 0, T_GTX, 1, 0);
    end

    // 2. anisotropic scatterer: K = 16, P = 256, at coefficient base 8192
    load_coef(8192, 2 * KS * PS, 1000);
    load_psi(0, PS, 3000);                       // psi(theta^i) towards node 1
    for (int k = 0; k < KS; k++) run(1'b0, PS, 1, 8192 + k * PS, T_ALPHA, k, 1);
    load_psi(0, PS, 3000);                       // psi(theta^o) towards node 2
    for (int k = 0; k < KS; k++) run(1'b0, PS, 1, 8192 + (KS + k) * PS, T_BETA, 2, k);

    checks++;
    if (n_pair != 4 || n_single != 2 * KS) failures++;
    $display("array evaluations %0d, scatterer evaluations %0d", n_pair, n_single);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
