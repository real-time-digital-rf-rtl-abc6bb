// delay_weight_sum -- the common computation of the direct-path node:
// NOUT outputs, each a weighted sum of NIN fractionally delayed input streams,
//
//   out[o](t) = sum_i  w[o][i] * x_i(t - d[o][i]).
//
// Every input stream has its own sample_buffer of DEPTH samples with NOUT read
// ports; each (o, i) pair has its own 4-tap fractional-delay filter
// (frac_interp) and complex multiplier. Delays d are unsigned fixed point,
// integer part [DW-1:FRAC_W] and fraction [FRAC_W-1:0]; the integer part
// indexes the buffer, the fraction sets the interpolation. Weights are Q2.14;
// the sum is kept at full precision and rounded and saturated once at the end.
// All input streams share one sample strobe (in_valid).
//
// Timing: fully pipelined, one sample per clock at most. out/out_valid follow
// x/in_valid by 3 clocks (buffer read, interpolation, multiply-accumulate).
// Weights and delays are sampled with the input sample they apply to.
module delay_weight_sum
  import dp_pkg::*;
#(
  parameter int unsigned NIN   = 2,
  parameter int unsigned NOUT  = 2,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned DW   = AW + FRAC_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  cplx_t         x     [NIN],
  input  cwgt_t         w     [NOUT][NIN],
  input  logic [DW-1:0] d     [NOUT][NIN],
  output logic          out_valid,
  output cplx_t         y     [NOUT]
);

  // Weights travel with the sample through the two stages before the MAC.
  cwgt_t w_d1 [NOUT][NIN];
  cwgt_t w_d2 [NOUT][NIN];
  logic [FRAC_W-1:0] mu_d1 [NOUT][NIN];

  cplx_t interp [NOUT][NIN];
  logic  buf_valid [NIN];
  logic  int_valid [NOUT][NIN];

  always_ff @(posedge clk) begin
    w_d1 <= w;
    w_d2 <= w_d1;
    for (int o = 0; o < NOUT; o++)
      for (int i = 0; i < NIN; i++)
        mu_d1[o][i] <= d[o][i][FRAC_W-1:0];
  end

  for (genvar i = 0; i < NIN; i++) begin : g_in
    logic [AW-1:0] rd_int [NOUT];
    cplx_t         taps   [NOUT][TAPS];
    for (genvar o = 0; o < NOUT; o++) begin : g_rd
      assign rd_int[o] = d[o][i][DW-1:FRAC_W];
    end
    sample_buffer #(.DEPTH(DEPTH), .NRD(NOUT)) u_buf (
      .clk, .rst_n,
      .in_valid (in_valid),
      .din      (x[i]),
      .rd_delay (rd_int),
      .out_valid(buf_valid[i]),
      .taps     (taps)
    );
    for (genvar o = 0; o < NOUT; o++) begin : g_fd
      frac_interp u_fd (
        .clk, .rst_n,
        .in_valid(buf_valid[i]),
        .x       (taps[o]),
        .mu      (mu_d1[o][i]),
        .y_valid (int_valid[o][i]),
        .y       (interp[o][i])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < NOUT; o++) y[o] <= '0;
    end else begin
      out_valid <= int_valid[0][0];
      if (int_valid[0][0]) begin
        for (int o = 0; o < NOUT; o++) begin
          logic signed [63:0] acc_re, acc_im;
          acc_re = '0;
          acc_im = '0;
          for (int i = 0; i < NIN; i++) begin
            acc_re += cmul_re(interp[o][i], w_d2[o][i]);
            acc_im += cmul_im(interp[o][i], w_d2[o][i]);
          end
          y[o].re <= sat_smp(rshift_round(acc_re, WFRAC));
          y[o].im <= sat_smp(rshift_round(acc_im, WFRAC));
        end
      end
    end
  end

endmodule
