// receiver_combiner -- receiver output of a direct-path node,
//
//   r(t) = sum_{n != SELF} G(theta^s, theta_n^i) * s_n(t - tau_{n,r}),
//
// the signals arriving from all other nodes, each weighted by the node's
// antenna gain towards that neighbour and shifted by the offset tau_{n,r}
// between the phase centre and the receiver's position. As on the
// scattering input side the signed offsets get TAU_BIAS samples added, so r
// is TAU_BIAS samples late with respect to the phase centre; that fixed
// latency is this design's choice and is the same for every neighbour.
//
// Timing: r/r_valid follow s/in_valid by 3 clocks; one sample per clock.
module receiver_combiner
  import dp_pkg::*;
#(
  parameter int unsigned N     = 3,
  parameter int unsigned SELF  = 0,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned DW   = $clog2(DEPTH) + FRAC_W
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t s      [N],
  input  cwgt_t grx    [N],
  input  tau_t  tau_rx [N],
  output logic  r_valid,
  output cplx_t r
);

  cwgt_t         w [1][N];
  logic [DW-1:0] d [1][N];
  cplx_t         y [1];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      w[0][n] = (n == SELF) ? '0 : grx[n];
      d[0][n] = DW'(clamp_delay(64'(signed'(tau_rx[n])) + 64'(TAU_BIAS << FRAC_W), DW));
    end
  end

  delay_weight_sum #(.NIN(N), .NOUT(1), .DEPTH(DEPTH)) u_sum (
    .clk, .rst_n,
    .in_valid,
    .x        (s),
    .w        (w),
    .d        (d),
    .out_valid(r_valid),
    .y        (y)
  );

  assign r = y[0];

endmodule
