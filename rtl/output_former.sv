// output_former -- output side of a direct-path node. It keeps the K
// intermediate signals and the node's own transmit signal in long buffers
// and forms, for every other node l,
//
//   y'_l(t) = G_l * s_tx(t - tau_l) + sum_k beta_{l,k} * v_k(t - tau_l + tau_{k,l})
//
// where tau_l is the link delay to node l (distance / c), tau_{k,l} the
// signed offset of scatterer k towards l, G_l the antenna gain towards l and
// beta_{l,k} scatterer k's outgoing response towards l. This is the factored
// form of the model: the N-1 received signals have already been reduced to K
// intermediate signals, so each output costs K+1 taps, not (N-1)*K.
// The intermediate signals arrive TAU_BIAS samples late (intermediate_former),
// so their read delay is tau_l - tau_{k,l} - TAU_BIAS. Delays are clamped to
// the buffer (1 .. DEPTH-3 samples). Output SELF is not produced (weights
// forced to zero).
//
// DEPTH is the longest link delay in samples: 2^23 = 8.4e6 samples holds the
// 500 km maximum range at 2.5 GS/s.
//
// Timing: y/y_valid follow v, s_tx/in_valid by 3 clocks. v and s_tx must be
// the same sample time (the node aligns them).
module output_former
  import dp_pkg::*;
#(
  parameter int unsigned N     = 3,
  parameter int unsigned K     = 16,
  parameter int unsigned SELF  = 0,
  parameter int unsigned DEPTH = 2**23,
  localparam int unsigned DW   = $clog2(DEPTH) + FRAC_W
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t v       [K],
  input  cplx_t s_tx,
  input  cwgt_t beta    [N][K],
  input  tau_t  tau_sc  [N][K],
  input  cwgt_t gtx     [N],
  input  tau_t  tau_out [N],
  output logic  y_valid,
  output cplx_t y       [N]
);

  cplx_t         x [K+1];
  cwgt_t         w [N][K+1];
  logic [DW-1:0] d [N][K+1];

  always_comb begin
    for (int k = 0; k < K; k++) x[k] = v[k];
    x[K] = s_tx;
    for (int l = 0; l < N; l++) begin
      for (int k = 0; k < K; k++) begin
        w[l][k] = (l == SELF) ? '0 : beta[l][k];
        d[l][k] = DW'(clamp_delay(64'(tau_out[l]) - 64'(signed'(tau_sc[l][k]))
                                  - 64'(TAU_BIAS << FRAC_W), DW));
      end
      w[l][K] = (l == SELF) ? '0 : gtx[l];
      d[l][K] = DW'(clamp_delay(64'(tau_out[l]), DW));
    end
  end

  delay_weight_sum #(.NIN(K+1), .NOUT(N), .DEPTH(DEPTH)) u_sum (
    .clk, .rst_n,
    .in_valid,
    .x        (x),
    .w        (w),
    .d        (d),
    .out_valid(y_valid),
    .y        (y)
  );

endmodule
