// dp_node -- one computational node of the direct-path RF emulator.
//
// Every object of a scenario (radar, base station, aircraft, passive
// reflector) is one node. A node takes the signal of its own transmitter and
// the signals arriving from the N-1 other nodes and produces one signal for
// each other node plus the output of its own receiver:
//
//   v_k(t)  = sum_{n != m} alpha_{k,n} s_n(t - tau_{n,k})                 (K intermediate signals)
//   y'_l(t) = G_l s_m(t - tau_l) + sum_k beta_{l,k} v_k(t - tau_l + tau_{k,l})
//   y_l(t)  = C_l exp(-j phi_l(t)) y'_l(t)                               (path loss, Doppler)
//   r(t)    = sum_{n != m} Grx_n s_n(t - tau_{n,r})                       (receiver)
//
// Because the scatterers' responses are separable, alpha(theta^i)*beta(theta^o),
// the N-1 inputs are first reduced to K intermediate signals and only those
// are kept over the long link delay; each output then costs K+1 taps. This is
// what brings the emulator from O(N^3 K) to O(N^2 K) operations per sample.
//
// Structure: intermediate_former (short input histories) -> output_former
// (long buffers of v_k and s_m) -> one link_modulator per destination;
// receiver_combiner in parallel; param_bank holds the scenario numbers and
// swaps them every update period.
//
// Timing and delays. The emulator runs one sample per clock on all nodes at
// once (in_valid is the common sample strobe and stays high while running).
// A link output leaves NODE_LAT = 8 clocks after the node's input sample it
// belongs to and reaches the next node LINK_LAT clocks after that input
// (NODE_LAT plus the network's register stages). The node therefore reads its
// long buffers LINK_LAT samples less than tau_l, so that the total delay seen
// from transmitter to receiving node is exactly tau_l (tau_l must be at least
// LINK_LAT+1 samples). The transmit signal is held back 3 clocks to meet the
// intermediate signals of the same sample time. r(t) appears 3 clocks after
// the input plus TAU_BIAS samples. The parameter update reaches the link
// modulators 6 clocks after it reaches the input, together with the sample
// it belongs to.
module dp_node
  import dp_pkg::*;
#(
  parameter int unsigned N              = 3,
  parameter int unsigned K              = 16,
  parameter int unsigned SELF           = 0,
  parameter int unsigned DEPTH_IN       = 256,
  parameter int unsigned DEPTH_OUT      = 2**23,
  parameter int unsigned UPDATE_SAMPLES = 3250000,
  parameter int unsigned LINK_LAT       = 9
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  cplx_t       tx_in,             // s_m: this object's transmitter
  input  cplx_t       s_link [N],        // s_n from node n (entry SELF unused)
  // parameter port
  input  logic        force_update,
  input  logic        wr_en,
  input  ptable_e     wr_table,
  input  logic [7:0]  wr_row,
  input  logic [7:0]  wr_col,
  input  logic [31:0] wr_data,
  // outputs
  output logic        y_valid,
  output cplx_t       y_link [N],        // y_{m,l} to node l (entry SELF is zero)
  output logic        r_valid,
  output cplx_t       r_out              // r_m: this object's receiver
);

  localparam int unsigned NODE_LAT = 8;
  localparam int unsigned FE_LAT   = 3;   // intermediate_former latency
  localparam int unsigned OF_LAT   = 3;   // output_former latency

  // ---------------- parameters ----------------
  logic               period_start;
  cwgt_t              alpha    [K][N];
  tau_t               tau_in   [K][N];
  cwgt_t              beta     [N][K];
  tau_t               tau_sc   [N][K];
  cwgt_t              gtx      [N];
  tau_t               tau_out  [N];
  cwgt_t              grx      [N];
  tau_t               tau_rx   [N];
  logic [PL_W-1:0]    pl_mant  [N];
  logic [PL_SH_W-1:0] pl_shift [N];
  logic [31:0]        dop_inc  [N];
  logic [31:0]        dop_ph0  [N];

  param_bank #(.N(N), .K(K), .UPDATE_SAMPLES(UPDATE_SAMPLES)) u_params (
    .clk, .rst_n, .in_valid, .force_update,
    .wr_en, .wr_table, .wr_row, .wr_col, .wr_data,
    .period_start,
    .alpha, .tau_in, .beta, .tau_sc, .gtx, .tau_out, .grx, .tau_rx,
    .pl_mant, .pl_shift, .dop_inc, .dop_ph0
  );

  // ---------------- input side ----------------
  logic  v_valid;
  cplx_t v [K];

  intermediate_former #(.N(N), .K(K), .SELF(SELF), .DEPTH(DEPTH_IN)) u_fe (
    .clk, .rst_n, .in_valid,
    .s      (s_link),
    .alpha  (alpha),
    .tau_in (tau_in),
    .v_valid(v_valid),
    .v      (v)
  );

  receiver_combiner #(.N(N), .SELF(SELF), .DEPTH(DEPTH_IN)) u_rx (
    .clk, .rst_n, .in_valid,
    .s      (s_link),
    .grx    (grx),
    .tau_rx (tau_rx),
    .r_valid(r_valid),
    .r      (r_out)
  );

  // transmit sample and period marker aligned with v
  cplx_t tx_d  [FE_LAT];
  logic  upd_d [FE_LAT + OF_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < FE_LAT; i++) tx_d[i] <= '0;
      for (int i = 0; i < FE_LAT + OF_LAT; i++) upd_d[i] <= 1'b0;
    end else begin
      tx_d[0]  <= tx_in;
      upd_d[0] <= in_valid && period_start;
      for (int i = 1; i < FE_LAT; i++) tx_d[i] <= tx_d[i-1];
      for (int i = 1; i < FE_LAT + OF_LAT; i++) upd_d[i] <= upd_d[i-1];
    end
  end

  // ---------------- output side ----------------
  tau_t  tau_rd [N];
  logic  yp_valid;
  cplx_t yp [N];

  always_comb begin
    for (int l = 0; l < N; l++) tau_rd[l] = tau_out[l] - tau_t'(LINK_LAT << FRAC_W);
  end

  output_former #(.N(N), .K(K), .SELF(SELF), .DEPTH(DEPTH_OUT)) u_of (
    .clk, .rst_n,
    .in_valid(v_valid),
    .v       (v),
    .s_tx    (tx_d[FE_LAT-1]),
    .beta    (beta),
    .tau_sc  (tau_sc),
    .gtx     (gtx),
    .tau_out (tau_rd),
    .y_valid (yp_valid),
    .y       (yp)
  );

  logic lm_valid [N];

  for (genvar l = 0; l < N; l++) begin : g_link
    if (l == SELF) begin : g_self
      assign y_link[l]   = '0;
      assign lm_valid[l] = yp_valid;
    end else begin : g_mod
      link_modulator u_lm (
        .clk, .rst_n,
        .in_valid(yp_valid),
        .load    (upd_d[FE_LAT + OF_LAT - 1]),
        .y_in    (yp[l]),
        .pl_mant (pl_mant[l]),
        .pl_shift(pl_shift[l]),
        .dop_inc (dop_inc[l]),
        .dop_ph0 (dop_ph0[l]),
        .y_valid (lm_valid[l]),
        .y       (y_link[l])
      );
    end
  end

  assign y_valid = lm_valid[(SELF == 0) ? 1 : 0];

  initial begin
    assert (NODE_LAT == FE_LAT + OF_LAT + 2)
      else $error("node latency bookkeeping is inconsistent");
    assert (LINK_LAT >= NODE_LAT)
      else $error("LINK_LAT must include the node latency");
  end

endmodule
