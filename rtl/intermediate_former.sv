// intermediate_former -- input side of a direct-path node: collapses the
// signals received from the other nodes into the node's K intermediate
// signals,
//
//   v_k(t) = sum_{n != SELF} alpha_{k,n} * s_n(t - tau_{n,k}),  k = 1..K.
//
// alpha_{k,n} is scatterer k's incoming response towards neighbour n and
// tau_{n,k} the extra travel time from the object's phase centre to
// scatterer k for a wave arriving from n (both from the model). Because
// tau_{n,k} may be negative, each offset has TAU_BIAS samples added before it
// is applied; v_k therefore comes out TAU_BIAS samples late, and the output
// side (output_former) removes that from the long link delay. Input SELF (the
// node's own transmitter) takes no part: its weight is forced to zero.
//
// Each received signal has a DEPTH-sample history, enough for scatterer
// offsets within +/-(TAU_BIAS) samples of the phase centre (the buffer depth
// and the bias are this design's choices).
//
// Timing: v/v_valid follow s/in_valid by 3 clocks; one sample per clock.
module intermediate_former
  import dp_pkg::*;
#(
  parameter int unsigned N     = 3,     // nodes in the scenario
  parameter int unsigned K     = 16,    // scattering points per object
  parameter int unsigned SELF  = 0,     // index of this node
  parameter int unsigned DEPTH = 256,   // short history per received signal
  localparam int unsigned DW   = $clog2(DEPTH) + FRAC_W
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t s      [N],
  input  cwgt_t alpha  [K][N],
  input  tau_t  tau_in [K][N],
  output logic  v_valid,
  output cplx_t v      [K]
);

  cwgt_t         w [K][N];
  logic [DW-1:0] d [K][N];

  always_comb begin
    for (int k = 0; k < K; k++) begin
      for (int n = 0; n < N; n++) begin
        w[k][n] = (n == SELF) ? '0 : alpha[k][n];
        d[k][n] = DW'(clamp_delay(64'(signed'(tau_in[k][n])) + 64'(TAU_BIAS << FRAC_W), DW));
      end
    end
  end

  delay_weight_sum #(.NIN(N), .NOUT(K), .DEPTH(DEPTH)) u_sum (
    .clk, .rst_n,
    .in_valid,
    .x        (s),
    .w        (w),
    .d        (d),
    .out_valid(v_valid),
    .y        (v)
  );

endmodule
