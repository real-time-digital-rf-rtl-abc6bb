// tb_dp_node -- one node (SELF = 0 of 3, K = 2, short long-buffer) fed with
// random transmit and received signals and random scenario parameters
// loaded through the parameter port. Every link output y_l and the receiver
// output r are compared with the real-arithmetic node model. The run spans
// two update periods: the second period's Doppler and path-loss numbers are
// written during the first and must take effect exactly at the boundary.
// Also checks the 8-clock link latency and 3-clock receiver latency.
// Runs with K = 2, a 2048-sample long buffer and a 500-sample update
// period; tb_dp_emulator_full covers the default sizes inside the top.
module tb_dp_node;
  import dp_pkg::*;
  import tb_ref_pkg::*;
  import tb_node_model_pkg::*;

  localparam int unsigned N = 3, K = 2, SELF = 0, DEPTH_OUT = 2048, UPD = 500, LAT = 9;
  localparam int T = 1100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid;
  cplx_t       tx_in;
  cplx_t       s_link [N];
  logic        force_update, wr_en;
  ptable_e     wr_table;
  logic [7:0]  wr_row, wr_col;
  logic [31:0] wr_data;
  logic        y_valid, r_valid;
  cplx_t       y_link [N];
  cplx_t       r_out;

  dp_node #(.N(N), .K(K), .SELF(SELF), .DEPTH_OUT(DEPTH_OUT), .UPDATE_SAMPLES(UPD), .LINK_LAT(LAT)) dut (.*);

  int checks = 0, failures = 0;
  node_model mdl;
  int n_y = 0, n_r = 0, cyc = 0, first_in = -1, first_y = -1, first_r = -1;
  int live [N];   // link outputs with a sizeable expected value

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && first_in < 0) first_in <= cyc;
    if (rst_n && y_valid) begin
      if (first_y < 0) first_y <= cyc;
      for (int l = 0; l < N; l++) begin
        checks++;
        if (mdl.y[l][n_y].re > 100.0 || mdl.y[l][n_y].re < -100.0) live[l]++;
        if (!close(y_link[l], mdl.y[l][n_y], 4.0)) begin
          failures++;
          if (failures < 10) $display("y t=%0d l=%0d got %0d,%0d exp %f,%f", n_y, l, y_link[l].re,
                                      y_link[l].im, mdl.y[l][n_y].re, mdl.y[l][n_y].im);
        end
      end
      n_y <= n_y + 1;
    end
    if (rst_n && r_valid) begin
      if (first_r < 0) first_r <= cyc;
      checks++;
      if (!close(r_out, mdl.r[n_r], 3.0)) begin
        failures++;
        if (failures < 10) $display("r t=%0d got %0d,%0d exp %f,%f", n_r, r_out.re, r_out.im,
                                    mdl.r[n_r].re, mdl.r[n_r].im);
      end
      n_r <= n_r + 1;
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input ptable_e tb, input int row, input int col, input logic [31:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_table = tb; wr_row = 8'(row); wr_col = 8'(col); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  function automatic logic [31:0] rtau(input int lo, input int hi);
    return 32'($signed($urandom_range((hi - lo) << FRAC_W, 0)) + (lo <<< FRAC_W));
  endfunction

  task automatic load_link(input int l);
    logic [PL_W-1:0] m;
    logic [31:0] inc, p0;
    m   = PL_W'($urandom_range(90000, 20000));
    inc = $urandom;
    p0  = $urandom;
    wr(T_PL, l, 0, {10'd0, 5'd0, m});
    wr(T_DOP_INC, l, 0, inc);
    wr(T_DOP_PH0, l, 0, p0);
    mdl.pl[l] = real'(m) / 65536.0; mdl.dinc[l] = inc; mdl.dph0[l] = p0;
  endtask

  initial begin
    logic [31:0] d;
    cwgt_t w;
    mdl = new(N, K, SELF, LAT, T + 10);
    for (int l = 0; l < N; l++) live[l] = 0;
    in_valid = 1'b0; force_update = 1'b0; wr_en = 1'b0;
    wr_table = T_ALPHA; wr_row = '0; wr_col = '0; wr_data = '0;
    tx_in = '0;
    for (int n = 0; n < N; n++) s_link[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // scenario parameters
    for (int k = 0; k < K; k++)
      for (int n = 0; n < N; n++) begin
        w = rand_wgt(8000); wr(T_ALPHA, k, n, w); mdl.alpha[k][n] = w_rc(w);
        d = rtau(-30, 30);  wr(T_TAU_IN, k, n, d); mdl.tau_in[k][n] = real'($signed(d)) / 256.0;
      end
    for (int l = 0; l < N; l++) begin
      for (int k = 0; k < K; k++) begin
        w = rand_wgt(6000); wr(T_BETA, l, k, w); mdl.beta[l][k] = w_rc(w);
        d = rtau(-30, 30);  wr(T_TAU_SC, l, k, d); mdl.tau_sc[l][k] = real'($signed(d)) / 256.0;
      end
      w = rand_wgt(6000); wr(T_GTX, l, 0, w); mdl.gtx[l] = w_rc(w);
      d = rtau(150, 600); wr(T_TAU_OUT, l, 0, d); mdl.tau_out[l] = real'(d) / 256.0;
      w = rand_wgt(8000); wr(T_GRX, l, 0, w); mdl.grx[l] = w_rc(w);
      d = rtau(-30, 30);  wr(T_TAU_RX, l, 0, d); mdl.tau_rx[l] = real'($signed(d)) / 256.0;
      load_link(l);
    end
    @(negedge clk);
    force_update = 1'b1;
    @(negedge clk);
    force_update = 1'b0;
    fork
      begin
        for (int t = 0; t < T; t++) begin
          rc_t s [];
          s = new[N];
          tx_in = rand_smp(8000);
          for (int n = 0; n < N; n++) begin
            s_link[n] = rand_smp(n == SELF ? 30000 : 8000);
            s[n] = to_rc(s_link[n]);
          end
          if (t == UPD) begin
            // second period: the numbers written below during the first
            for (int l = 0; l < N; l++) begin
              mdl.pl[l] = real'(p2_m[l]) / 65536.0; mdl.dinc[l] = p2_inc[l]; mdl.dph0[l] = p2_ph[l];
            end
          end
          mdl.step(t, tx_in, s, (t % UPD) == 0);
          in_valid = 1'b1;
          @(negedge clk);
        end
        in_valid = 1'b0;
      end
      begin
        // write the second period's link numbers into the shadow copy
        repeat (100) @(negedge clk);
        for (int l = 0; l < N; l++) begin
          p2_m[l] = PL_W'($urandom_range(90000, 20000)); p2_inc[l] = $urandom; p2_ph[l] = $urandom;
          wr(T_PL, l, 0, {15'd0, p2_m[l]});
          wr(T_DOP_INC, l, 0, p2_inc[l]);
          wr(T_DOP_PH0, l, 0, p2_ph[l]);
        end
      end
    join
    repeat (12) @(negedge clk);
    checks++;
    if (n_y != T || n_r != T) begin
      failures++;
      $display("outputs: %0d link, %0d receiver, expected %0d", n_y, n_r, T);
    end
    for (int l = 0; l < N; l++) begin
      checks++;
      if ((l != SELF) && live[l] < T / 3) begin
        failures++;
        $display("link %0d carried too little signal (%0d samples)", l, live[l]);
      end
    end
    checks++;
    if (first_y - first_in != 8 || first_r - first_in != 3) begin
      failures++;
      $display("latency: link %0d, receiver %0d", first_y - first_in, first_r - first_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [PL_W-1:0] p2_m [N];
  logic [31:0]     p2_inc [N], p2_ph [N];
endmodule
