// tb_dp_emulator_full -- the end-to-end scene of tb_dp_emulator run on the
// emulator at its default (paper-sized) parameters: 2^23-sample delay lines
// (500 km of range at 2.5 GS/s), K = 16 scattering points per node, an update
// period of 3.25 million samples, P up to 256. As in the interferometry
// scene the two radars are 4 km apart (33,356 samples) and the reflector is
// 8 km from both (66,712.875 and 66,713.625 samples one way), so the echoes
// return after about 133,400 samples, far beyond what the reduced test can
// hold. The run streams 134,400 samples per node and compares every receiver
// sample with the coupled real-arithmetic node models. The periodic swap is
// not reached in this run (it is covered by tb_dp_emulator); the forced swap,
// sh_eval evaluations, Doppler, direct and echo reception and held-off host
// writes are counted and must all occur. Needs about 1.8 GB of memory and
// about a minute with verilator.
module tb_dp_emulator_full;
  import dp_pkg::*;
  import tb_ref_pkg::*;
  import tb_node_model_pkg::*;

  localparam int unsigned N = 3, K = 16, P_MAX = 256, COEF_DEPTH = 16384;
  localparam int unsigned UPD = 3250000, LAT = 9;
  localparam int unsigned PW = $clog2(P_MAX + 1), CAW = $clog2(COEF_DEPTH), NW = $clog2(N);
  localparam int T = 134400;
  localparam int KA = 2;          // scattering points in use on object 2
  localparam int PS = 16;         // basis functions per scattering response
  localparam int PA = 4, DA = 2;  // basis size and rank of the antenna gain

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           in_valid;
  cplx_t          tx_in  [N];
  logic           rx_valid;
  cplx_t          rx_out [N];
  logic           force_update, hw_en, hw_ready;
  logic [NW-1:0]  hw_node;
  ptable_e        hw_table;
  logic [7:0]     hw_row, hw_col;
  logic [31:0]    hw_data;
  logic [NW-1:0]  sh_node;
  logic           sh_coef_we, sh_psi_we, sh_psi_sel, sh_cmd_valid, sh_cmd_ready, sh_cmd_pair;
  logic [CAW-1:0] sh_coef_addr, sh_cmd_base;
  cwgt_t          sh_coef_data, sh_psi_data;
  logic [PW-1:0]  sh_psi_idx, sh_cmd_p;
  logic [15:0]    sh_cmd_d;
  ptable_e        sh_cmd_table;
  logic [7:0]     sh_cmd_row, sh_cmd_col;

  dp_emulator dut (.*);

  int checks = 0, failures = 0;
  node_model mdl [N];
  int n_r = 0;
  // mechanism counters
  int c_direct = 0, c_echo = 0, c_doppler = 0, c_swap = 0, c_force = 0, c_single = 0, c_pair = 0, c_stall = 0;

  initial begin
    repeat (T + 58000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- receiver check ----------------
  always @(posedge clk) begin
    if (rst_n && rx_valid && n_r < T) begin
      for (int m = 0; m < N; m++) begin
        rc_t e;
        e = mdl[m].r[n_r];
        checks++;
        if (!close(rx_out[m], e, 6.0)) begin
          failures++;
          if (failures < 10) $display("rx t=%0d m=%0d got %0d,%0d exp %f,%f", n_r, m, rx_out[m].re,
                                      rx_out[m].im, e.re, e.im);
        end
        if (e.re > 100.0 || e.re < -100.0) begin
          if (m == 2) c_direct++;
          else        c_echo++;
        end
      end
    end
    if (rst_n && rx_valid) n_r <= n_r + 1;
    if (rst_n && in_valid && dut.g_node[0].u_node.period_start && n_r > 0) c_swap++;
    if (rst_n && hw_en && !hw_ready) c_stall++;
  end

  // latency from the first streamed sample to the first receiver sample
  int cyc = 0, first_in = -1, rx_lat = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && first_in < 0) first_in <= cyc;
    if (rst_n && rx_valid && rx_lat < 0) rx_lat <= cyc - first_in;
  end

  // ---------------- host helpers ----------------
  task automatic hwr(input int node, input ptable_e tb, input int row, input int col, input logic [31:0] d);
    @(negedge clk);
    hw_en = 1'b1; hw_node = NW'(node); hw_table = tb; hw_row = 8'(row); hw_col = 8'(col); hw_data = d;
    @(posedge clk);
    while (!hw_ready) @(posedge clk);
    @(negedge clk);
    hw_en = 1'b0;
  endtask

  function automatic logic [31:0] ftau(input real samples);
    return 32'($rtoi(samples * 256.0));
  endfunction

  // symmetric link between a and b: delay, gains, path loss
  task automatic link(input int a, input int b, input real dly, input cwgt_t ga, input cwgt_t gb);
    hwr(a, T_TAU_OUT, b, 0, ftau(dly)); mdl[a].tau_out[b] = real'(ftau(dly)) / 256.0;
    hwr(b, T_TAU_OUT, a, 0, ftau(dly)); mdl[b].tau_out[a] = real'(ftau(dly)) / 256.0;
    hwr(a, T_GTX, b, 0, ga); mdl[a].gtx[b] = w_rc(ga);
    hwr(b, T_GTX, a, 0, gb); mdl[b].gtx[a] = w_rc(gb);
    hwr(a, T_GRX, b, 0, ga); mdl[a].grx[b] = w_rc(ga);
    hwr(b, T_GRX, a, 0, gb); mdl[b].grx[a] = w_rc(gb);
    hwr(a, T_PL, b, 0, 32'd65536); mdl[a].pl[b] = 1.0;
    hwr(b, T_PL, a, 0, 32'd65536); mdl[b].pl[a] = 1.0;
  endtask

  task automatic doppler(input int a, input int b, input logic [31:0] inc, input logic [31:0] ph0);
    hwr(a, T_DOP_INC, b, 0, inc);
    hwr(a, T_DOP_PH0, b, 0, ph0);
  endtask

  // ---------------- spherical-harmonic evaluation on object 2 ----------------
  cwgt_t coef [COEF_DEPTH];
  cwgt_t psi  [2][P_MAX];

  task automatic sh_load_coef(input int node, input int base, input int cnt);
    for (int i = 0; i < cnt; i++) begin
      @(negedge clk);
      sh_node = NW'(node); sh_coef_we = 1'b1; sh_coef_addr = CAW'(base + i);
      sh_coef_data = rand_wgt(6000); coef[base + i] = sh_coef_data;
    end
    @(negedge clk);
    sh_coef_we = 1'b0;
  endtask

  task automatic sh_load_psi(input int node, input int sel, input int cnt);
    for (int i = 0; i < cnt; i++) begin
      @(negedge clk);
      sh_node = NW'(node); sh_psi_we = 1'b1; sh_psi_sel = sel[0]; sh_psi_idx = PW'(i);
      sh_psi_data = rand_wgt(6000); psi[sel][i] = sh_psi_data;
    end
    @(negedge clk);
    sh_psi_we = 1'b0;
  endtask

  function automatic rc_t dotp(input int sel, input int base, input int p);
    rc_t acc;
    acc = rc(0.0, 0.0);
    for (int i = 0; i < p; i++) acc = rc_add(acc, rc_mul(w_rc(psi[sel][i]), w_rc(coef[base + i])));
    return acc;
  endfunction

  function automatic rc_t q14(input rc_t v);
    return rc($floor(v.re * 16384.0 + 0.5) / 16384.0, $floor(v.im * 16384.0 + 0.5) / 16384.0);
  endfunction

  task automatic sh_cmd(input int node, input bit pair, input int p, input int d, input int base,
                        input ptable_e tb, input int row, input int col);
    @(negedge clk);
    while (!sh_cmd_ready) @(negedge clk);
    sh_node = NW'(node); sh_cmd_valid = 1'b1; sh_cmd_pair = pair; sh_cmd_p = PW'(p);
    sh_cmd_d = 16'(d); sh_cmd_base = CAW'(base); sh_cmd_table = tb; sh_cmd_row = 8'(row); sh_cmd_col = 8'(col);
    @(negedge clk);
    sh_cmd_valid = 1'b0;
    // the engine is busy now; keep a host write to the same node pending so
    // that it meets the engine's result write (it targets the node's own,
    // unused, receiver entry)
    hw_en = 1'b1; hw_node = NW'(node); hw_table = T_TAU_RX; hw_row = 8'(node); hw_col = 8'd0; hw_data = '0;
    while (!sh_cmd_ready) @(negedge clk);
    repeat (3) @(negedge clk);
    hw_en = 1'b0;
    if (pair) c_pair++; else c_single++;
  endtask

  // the links carry rounded, saturated 16-bit samples
  function automatic real qr(input real v);
    real r;
    r = $floor(v + 0.5);
    return (r > 32767.0) ? 32767.0 : (r < -32768.0) ? -32768.0 : r;
  endfunction
  function automatic rc_t qs(input rc_t v);
    return rc(qr(v.re), qr(v.im));
  endfunction

  // ---------------- stimulus ----------------
  function automatic cplx_t pulse(input int t, input int start, input real f);
    cplx_t x;
    int u;
    u = (t - start) % 400;
    if (t < start || u >= 64) return '0;
    x.re = smp_t'($rtoi(8000.0 * $cos(2.0 * 3.14159265358979 * f * u)));
    x.im = smp_t'($rtoi(8000.0 * $sin(2.0 * 3.14159265358979 * f * u)));
    return x;
  endfunction

  initial begin
    cwgt_t one, zero;
    logic [31:0] inc20, inc21;
    rc_t ga;
    one.re = 16'sd16384; one.im = '0;
    zero = '0;
    for (int m = 0; m < N; m++) mdl[m] = new(N, K, m, LAT, T + 10);
    in_valid = 1'b0; force_update = 1'b0; hw_en = 1'b0; hw_node = '0; hw_table = T_ALPHA;
    hw_row = '0; hw_col = '0; hw_data = '0;
    sh_node = '0; sh_coef_we = 0; sh_psi_we = 0; sh_psi_sel = 0; sh_cmd_valid = 0; sh_cmd_pair = 0;
    sh_coef_addr = '0; sh_cmd_base = '0; sh_coef_data = '0; sh_psi_data = '0; sh_psi_idx = '0;
    sh_cmd_p = '0; sh_cmd_d = '0; sh_cmd_table = T_ALPHA; sh_cmd_row = '0; sh_cmd_col = '0;
    for (int m = 0; m < N; m++) tx_in[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // geometry: 0 and 1 are 4 km-like apart (no mutual path), 2 is the target
    link(0, 1, 33356.375, zero, zero);
    link(0, 2, 66712.875, one, one);
    link(1, 2, 66713.625, one, one);
    // receiver offsets of 0 and 1 (phase centre to receiver)
    hwr(0, T_TAU_RX, 2, 0, ftau(1.5));  mdl[0].tau_rx[2] = 1.5;
    hwr(1, T_TAU_RX, 2, 0, ftau(-2.25)); mdl[1].tau_rx[2] = -2.25;

    // object 2: scattering points, weights from spherical harmonics
    sh_load_coef(2, 0, 2 * KA * PS);
    for (int n = 0; n < 2; n++) begin
      sh_load_psi(2, 0, PS);                 // psi(theta_n^i)
      for (int k = 0; k < KA; k++) begin
        sh_cmd(2, 1'b0, PS, 1, k * PS, T_ALPHA, k, n);
        mdl[2].alpha[k][n] = q14(dotp(0, k * PS, PS));
      end
      sh_load_psi(2, 0, PS);                 // psi(theta_n^o)
      for (int k = 0; k < KA; k++) begin
        sh_cmd(2, 1'b0, PS, 1, (KA + k) * PS, T_BETA, n, k);
        mdl[2].beta[n][k] = q14(dotp(0, (KA + k) * PS, PS));
      end
    end
    for (int k = 0; k < KA; k++)
      for (int n = 0; n < 2; n++) begin
        real ti, ts;
        ti = (k == 0) ? 3.25 : -4.5;
        ts = (k == 0) ? -1.75 + n : 2.5 - n;
        hwr(2, T_TAU_IN, k, n, ftau(ti)); mdl[2].tau_in[k][n] = ti;
        hwr(2, T_TAU_SC, n, k, ftau(ts)); mdl[2].tau_sc[n][k] = ts;
      end
    // object 0: steered array gain towards 2, rank-DA model (pair form)
    sh_load_coef(0, 0, 2 * DA * PA);
    sh_load_psi(0, 0, PA);                   // psi(theta), towards 2
    sh_load_psi(0, 1, PA);                   // psi(theta^s), steering
    sh_cmd(0, 1'b1, PA, DA, 0, T_GTX, 2, 0);
    ga = rc(0, 0);
    for (int d = 0; d < DA; d++) begin
      rc_t a, g;
      a  = q14(dotp(1, 2 * d * PA, PA));
      g  = q14(dotp(0, (2 * d + 1) * PA, PA));
      ga = rc_add(ga, rc_mul(rc(a.re, -a.im), g));
    end
    mdl[0].gtx[2] = q14(ga);
    // Doppler on the links leaving the moving target
    inc20 = 32'd4_000_000; inc21 = 32'hFFF0_0000;
    doppler(2, 0, inc20, 32'h1000_0000); mdl[2].dinc[0] = inc20; mdl[2].dph0[0] = 32'h1000_0000;
    doppler(2, 1, inc21, 32'h0);         mdl[2].dinc[1] = inc21; mdl[2].dph0[1] = 32'h0;

    @(negedge clk);
    force_update = 1'b1;
    c_force++;
    @(negedge clk);
    force_update = 1'b0;

    fork
      begin
        for (int t = 0; t < T; t++) begin
          if (t > 0 && t % UPD == 0) begin
            for (int m = 0; m < N; m++) begin
              mdl[m].dinc[0] = p_inc[m][0]; mdl[m].dinc[1] = p_inc[m][1];
              mdl[m].dph0[0] = p_ph[m][0];  mdl[m].dph0[1] = p_ph[m][1];
            end
          end
          tx_in[0] = pulse(t, 0, 0.03);
          tx_in[1] = pulse(t, 150, -0.02);
          tx_in[2] = '0;
          for (int m = 0; m < N; m++) begin
            rc_t s [];
            s = new[N];
            for (int n = 0; n < N; n++) s[n] = (t >= LAT) ? qs(mdl[n].y[m][t - LAT]) : rc(0, 0);
            mdl[m].step(t, tx_in[m], s, (t % UPD) == 0);
          end
          if (mdl[2].dinc[0] != 0 && (mdl[2].y[0][t].re > 100.0 || mdl[2].y[0][t].re < -100.0)) c_doppler++;
          in_valid = 1'b1;
          @(negedge clk);
        end
      end
      begin
        // next period's Doppler numbers, written while the stream runs
        for (int per = 1; per <= (T - 1) / UPD; per++) begin
          @(negedge clk);
          while (n_r < per * UPD - 300) @(negedge clk);
          for (int m = 0; m < N; m++) begin
            p_inc[m][0] = mdl[m].dinc[0]; p_inc[m][1] = mdl[m].dinc[1];
            p_ph[m][0] = mdl[m].dph0[0];  p_ph[m][1] = mdl[m].dph0[1];
          end
          p_inc[2][0] = $urandom_range(8_000_000, 1_000_000); p_ph[2][0] = $urandom;
          p_inc[2][1] = -$urandom_range(8_000_000, 1_000_000); p_ph[2][1] = $urandom;
          doppler(2, 0, p_inc[2][0], p_ph[2][0]);
          doppler(2, 1, p_inc[2][1], p_ph[2][1]);
        end
      end
    join
    in_valid = 1'b1;   // keep streaming while the last outputs drain
    repeat (6) @(negedge clk);
    checks++;
    if (dut.g_node[0].u_node.u_params.gtx[2] != cwgt_t'({smp_t'($rtoi(mdl[0].gtx[2].re * 16384.0)),
                                                       smp_t'($rtoi(mdl[0].gtx[2].im * 16384.0))})) begin
      failures++; $display("pair-evaluated gain mismatch");
    end
    checks++;
    if (rx_lat != 3) begin failures++; $display("receiver latency %0d, expected 3", rx_lat); end
    $display("mechanisms: direct=%0d echo=%0d doppler=%0d swap=%0d force=%0d sh_single=%0d sh_pair=%0d stall=%0d",
             c_direct, c_echo, c_doppler, c_swap, c_force, c_single, c_pair, c_stall);
    checks++; if (c_direct  == 0) begin failures++; $display("no direct-path reception"); end
    checks++; if (c_echo    == 0) begin failures++; $display("no echo reception"); end
    checks++; if (c_doppler == 0) begin failures++; $display("no Doppler"); end
    if (T > UPD) begin
      checks++; if (c_swap == 0) begin failures++; $display("no periodic swap"); end
    end
    checks++; if (c_force   == 0) begin failures++; $display("no forced swap"); end
    checks++; if (c_single  == 0) begin failures++; $display("no single evaluation"); end
    checks++; if (c_pair    == 0) begin failures++; $display("no pair evaluation"); end
    checks++; if (c_stall   == 0) begin failures++; $display("no held-off host write"); end
    checks++; if (n_r < T) begin failures++; $display("only %0d receiver samples", n_r); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] p_inc [N][2], p_ph [N][2];
endmodule
