// tb_node_model_pkg -- real-arithmetic model of one direct-path node, used
// as the reference by the node and system testbenches. It evaluates the
// model equations sample by sample (no rounding inside):
//   v_k(t)  = sum_{n != m} alpha_{k,n} I(s_n, tau_{n,k})
//   y'_l(t) = G_l I(tx, tau_l) + sum_k beta_{l,k} I(v_k, tau_l - tau_{k,l})
//   y_l(t)  = C_l exp(-j phi_l(t)) y'_l(t)
//   r(t)    = sum_{n != m} Grx_n I(s_n, tau_{n,r})
// where I(x, D) is the 4-tap quadratic-spline interpolation of x at delay D.
// The hardware's fixed offsets (TAU_BIAS on the short delays, the link
// latency taken off tau_l) are applied exactly as the hardware documents them.
// The Doppler phase uses the same 10-bit phase rounding and Q1.15 table
// values as the hardware, so only arithmetic rounding separates the two.
package tb_node_model_pkg;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  class node_model;
    int n_nodes, k_sc, self_id, lat, t_max;
    // parameters as reals (delays in samples)
    rc_t  alpha [][];      // [k][n]
    real  tau_in [][];     // [k][n]
    rc_t  beta [][];       // [l][k]
    real  tau_sc [][];     // [l][k]
    rc_t  gtx [];
    real  tau_out [];
    rc_t  grx [];
    real  tau_rx [];
    real  pl [];           // linear path loss
    logic [31:0] dinc [], dph0 [];
    // link state
    real  pl_q [];
    logic [31:0] ph [], inc_q [];
    // histories
    rc_t  s_h [][];        // [n][t]
    rc_t  tx_h [];
    rc_t  v_h [][];        // [k][t]
    rc_t  y [][];          // [l][t]  outputs
    rc_t  r [];            // [t]

    function new(int n, int k, int self_id_i, int lat_i, int t_max_i);
      n_nodes = n; k_sc = k; self_id = self_id_i; lat = lat_i; t_max = t_max_i;
      alpha = new[k]; tau_in = new[k]; v_h = new[k];
      foreach (alpha[i]) begin
        alpha[i] = new[n]; tau_in[i] = new[n]; v_h[i] = new[t_max];
        foreach (alpha[i][j]) begin alpha[i][j] = rc(0, 0); tau_in[i][j] = 0; end
      end
      beta = new[n]; tau_sc = new[n]; s_h = new[n]; y = new[n];
      foreach (beta[i]) begin
        beta[i] = new[k]; tau_sc[i] = new[k]; s_h[i] = new[t_max]; y[i] = new[t_max];
        foreach (beta[i][j]) begin beta[i][j] = rc(0, 0); tau_sc[i][j] = 0; end
      end
      gtx = new[n]; tau_out = new[n]; grx = new[n]; tau_rx = new[n]; pl = new[n];
      dinc = new[n]; dph0 = new[n]; pl_q = new[n]; ph = new[n]; inc_q = new[n];
      foreach (gtx[i]) begin
        gtx[i] = rc(0, 0); grx[i] = rc(0, 0); tau_out[i] = 20; tau_rx[i] = 0; pl[i] = 0;
        dinc[i] = 0; dph0[i] = 0; pl_q[i] = 0; ph[i] = 0; inc_q[i] = 0;
      end
      tx_h = new[t_max]; r = new[t_max];
    endfunction

    function rc_t interp(ref rc_t h [], input int t, input real dly);
      int   ni;
      real  mu;
      rc_t  acc;
      ni  = $floor(dly);
      mu  = dly - ni;
      acc = rc(0.0, 0.0);
      for (int j = 0; j < TAPS; j++) begin
        int ti;
        ti = t - ni + 1 - j;
        if (ti >= 0 && ti <= t) acc = rc_add(acc, rc_scale(h[ti], spline_tap(j, mu)));
      end
      return acc;
    endfunction

    // one sample; load = first sample of an update period
    function void step(int t, cplx_t tx, rc_t s [], bit load);
      real B;
      B = real'(TAU_BIAS);
      tx_h[t] = to_rc(tx);
      foreach (s[n]) s_h[n][t] = s[n];
      for (int k = 0; k < k_sc; k++) begin
        rc_t acc;
        acc = rc(0, 0);
        for (int n = 0; n < n_nodes; n++)
          if (n != self_id) acc = rc_add(acc, rc_mul(alpha[k][n], interp(s_h[n], t, tau_in[k][n] + B)));
        v_h[k][t] = acc;
      end
      r[t] = rc(0, 0);
      for (int n = 0; n < n_nodes; n++)
        if (n != self_id) r[t] = rc_add(r[t], rc_mul(grx[n], interp(s_h[n], t, tau_rx[n] + B)));
      for (int l = 0; l < n_nodes; l++) begin
        rc_t yp, e;
        logic [31:0] pr;
        real ang, cs, sn;
        if (l == self_id) begin
          y[l][t] = rc(0, 0);
          continue;
        end
        if (load) begin
          ph[l] = dph0[l]; inc_q[l] = dinc[l]; pl_q[l] = pl[l];
        end
        yp = rc_mul(gtx[l], interp(tx_h, t, tau_out[l] - lat));
        for (int k = 0; k < k_sc; k++)
          yp = rc_add(yp, rc_mul(beta[l][k], interp(v_h[k], t, tau_out[l] - lat - tau_sc[l][k] - B)));
        pr  = ph[l] + 32'h0020_0000;
        ang = 2.0 * 3.14159265358979323846 * real'(pr[31:22]) / 1024.0;
        cs  = $floor($cos(ang) * 32768.0 + 0.5); if (cs > 32767.0) cs = 32767.0;
        sn  = $floor($sin(ang) * 32768.0 + 0.5); if (sn > 32767.0) sn = 32767.0;
        e   = rc((yp.re * cs + yp.im * sn) / 32768.0, (yp.im * cs - yp.re * sn) / 32768.0);
        y[l][t] = rc_scale(e, pl_q[l]);
        ph[l] = ph[l] + inc_q[l];
      end
    endfunction
  endclass
endpackage
