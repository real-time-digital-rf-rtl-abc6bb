// tb_sh_eval -- loads random spherical-harmonic coefficients and basis
// vectors, runs single dot products (alpha/beta form) and rank-D pair sums
// (array gain form), and compares with the same sums in real arithmetic.
// Also checks the destination fields, cmd_ready, and the cycle counts
// P+2 and 2*D*P+2.
// Runs with P_MAX = 16 and 512 coefficient words to keep the run short;
// tb_sh_eval_workloads covers the default sizes.
module tb_sh_eval;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned P_MAX = 16, COEF_DEPTH = 512;
  localparam int unsigned PW = $clog2(P_MAX + 1), CAW = $clog2(COEF_DEPTH);

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

  sh_eval #(.P_MAX(P_MAX), .COEF_DEPTH(COEF_DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  cwgt_t m_coef [COEF_DEPTH];
  cwgt_t m_psi  [2][P_MAX];

  initial begin
    repeat (20000) @(posedge clk);
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

  task automatic run(input bit pair, input int p, input int d, input int base, input ptable_e tb,
                     input int row, input int col);
    rc_t  e;
    int   cyc;
    cwgt_t g;
    if (!pair) e = dot(0, base, p);
    else begin
      e = rc(0.0, 0.0);
      for (int i = 0; i < d; i++) begin
        rc_t a, gg;
        a  = dot(1, base + 2 * i * p, p);
        gg = dot(0, base + (2 * i + 1) * p, p);
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
    checks++;
    if (cmd_ready) failures++;          // busy now
    while (!res_valid && cyc < 5000) begin
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
    if (!close(cplx_t'(g), e, pair ? 2.0 : 0.51)) begin
      failures++;
      $display("pair=%0d got %0d,%0d exp %f,%f", pair, g.re, g.im, e.re, e.im);
    end
  endtask

  initial begin
    coef_we = 0; psi_we = 0; cmd_valid = 0; coef_addr = '0; coef_data = '0;
    psi_sel = 0; psi_idx = '0; psi_data = '0; cmd_pair = 0; cmd_p = '0; cmd_d = '0;
    cmd_base = '0; cmd_table = T_ALPHA; cmd_row = '0; cmd_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 6; rep++) begin
      int amp;
      amp = (rep < 3) ? 8000 : 3000;
      for (int a = 0; a < COEF_DEPTH; a++) begin
        @(negedge clk);
        coef_we = 1; coef_addr = CAW'(a); coef_data = rand_wgt(amp); m_coef[a] = coef_data;
      end
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < P_MAX; i++) begin
          @(negedge clk);
          coef_we = 0;
          psi_we = 1; psi_sel = s[0]; psi_idx = PW'(i); psi_data = rand_wgt(amp); m_psi[s][i] = psi_data;
        end
      @(negedge clk);
      psi_we = 0;
      if (rep < 3) begin
        run(1'b0, P_MAX, 1, 5 + rep, T_ALPHA, rep, 2);
        run(1'b0, 7, 1, 300, T_BETA, 1, rep);
        run(1'b0, 1, 1, 17, T_GRX, 2, 0);
      end else begin
        run(1'b1, 8, 3, 100, T_GTX, rep - 3, 0);
        run(1'b1, 4, 1, 0, T_GRX, 1, 0);
        run(1'b1, 16, 2, 200, T_GTX, 2, 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
