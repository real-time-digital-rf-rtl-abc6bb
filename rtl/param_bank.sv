// param_bank -- scenario parameters of one node, double buffered.
//
// The scenario (positions, velocities, orientations, steering) changes slowly
// against the sample rate, so the host recomputes the per-node numbers once
// per update period (1.3 ms, i.e. 3.25e6 samples at 2.5 GS/s) and loads them
// here. Writes go to a shadow copy; the datapath reads the active copy. The
// two are swapped between two samples when the period ends, so every sample
// is processed with one consistent set. The host may also request a swap at
// once (force_update), e.g. to start a scenario.
//
// Write port: one 32-bit entry per clock, addressed by table (dp_pkg::ptable_e),
// row and column. Weight tables take {re, im} Q2.14 halves; delays are 32-bit
// fixed point with FRAC_W fraction bits; see dp_pkg for every table. Entries
// outside a table's size are ignored.
//
// period_start is high from a swap until the next sample has been taken
// (in_valid); a consumer treats in_valid & period_start as "first sample of a
// new period". The period counter counts samples (in_valid), not clocks.
// The double buffering and write port are this design's choices; the paper
// gives only the update interval.
module param_bank
  import dp_pkg::*;
#(
  parameter int unsigned N              = 3,
  parameter int unsigned K              = 16,
  parameter int unsigned UPDATE_SAMPLES = 3250000   // 1.3 ms at 2.5 GS/s
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               force_update,
  input  logic               wr_en,
  input  ptable_e            wr_table,
  input  logic [7:0]         wr_row,
  input  logic [7:0]         wr_col,
  input  logic [31:0]        wr_data,
  output logic               period_start,
  output cwgt_t              alpha    [K][N],
  output tau_t               tau_in   [K][N],
  output cwgt_t              beta     [N][K],
  output tau_t               tau_sc   [N][K],
  output cwgt_t              gtx      [N],
  output tau_t               tau_out  [N],
  output cwgt_t              grx      [N],
  output tau_t               tau_rx   [N],
  output logic [PL_W-1:0]    pl_mant  [N],
  output logic [PL_SH_W-1:0] pl_shift [N],
  output logic [31:0]        dop_inc  [N],
  output logic [31:0]        dop_ph0  [N]
);

  localparam int unsigned CW = $clog2(UPDATE_SAMPLES + 1);
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;

  logic [KW-1:0] wk_row, wk_col;   // row/column as scatterer index
  logic [NW-1:0] wn_row, wn_col;   // row/column as node index
  assign wk_row = wr_row[KW-1:0];
  assign wk_col = wr_col[KW-1:0];
  assign wn_row = wr_row[NW-1:0];
  assign wn_col = wr_col[NW-1:0];

  // Shadow copy, one flat word array per table.
  logic [31:0] sh_alpha  [K][N];
  logic [31:0] sh_tau_in [K][N];
  logic [31:0] sh_beta   [N][K];
  logic [31:0] sh_tau_sc [N][K];
  logic [31:0] sh_link   [8][N];   // T_GTX .. T_DOP_PH0, indexed table-4
  logic [31:0] ac_alpha  [K][N];
  logic [31:0] ac_tau_in [K][N];
  logic [31:0] ac_beta   [N][K];
  logic [31:0] ac_tau_sc [N][K];
  logic [31:0] ac_link   [8][N];

  logic [CW-1:0] cnt;
  logic          swap;

  assign swap = force_update || (in_valid && cnt == CW'(UPDATE_SAMPLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt          <= '0;
      period_start <= 1'b1;
    end else begin
      if (swap) begin
        cnt          <= '0;
        period_start <= 1'b1;
      end else if (in_valid) begin
        cnt          <= cnt + 1'b1;
        period_start <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++)
        for (int n = 0; n < N; n++) begin
          sh_alpha[k][n] <= '0; sh_tau_in[k][n] <= '0;
          ac_alpha[k][n] <= '0; ac_tau_in[k][n] <= '0;
        end
      for (int n = 0; n < N; n++) begin
        for (int k = 0; k < K; k++) begin
          sh_beta[n][k] <= '0; sh_tau_sc[n][k] <= '0;
          ac_beta[n][k] <= '0; ac_tau_sc[n][k] <= '0;
        end
        for (int t = 0; t < 8; t++) begin
          sh_link[t][n] <= '0;
          ac_link[t][n] <= '0;
        end
      end
    end else begin
      if (wr_en) begin
        unique case (wr_table)
          T_ALPHA:   if (wr_row < 8'(K) && wr_col < 8'(N)) sh_alpha [wk_row][wn_col] <= wr_data;
          T_TAU_IN:  if (wr_row < 8'(K) && wr_col < 8'(N)) sh_tau_in[wk_row][wn_col] <= wr_data;
          T_BETA:    if (wr_row < 8'(N) && wr_col < 8'(K)) sh_beta  [wn_row][wk_col] <= wr_data;
          T_TAU_SC:  if (wr_row < 8'(N) && wr_col < 8'(K)) sh_tau_sc[wn_row][wk_col] <= wr_data;
          T_GTX, T_TAU_OUT, T_GRX, T_TAU_RX, T_PL, T_DOP_INC, T_DOP_PH0:
                     if (wr_row < 8'(N)) sh_link[3'(wr_table - T_GTX)][wn_row] <= wr_data;
          default: ;
        endcase
      end
      if (swap) begin
        ac_alpha  <= sh_alpha;
        ac_tau_in <= sh_tau_in;
        ac_beta   <= sh_beta;
        ac_tau_sc <= sh_tau_sc;
        ac_link   <= sh_link;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < K; k++)
      for (int n = 0; n < N; n++) begin
        alpha[k][n]  = cwgt_t'(ac_alpha[k][n]);
        tau_in[k][n] = ac_tau_in[k][n];
      end
    for (int n = 0; n < N; n++) begin
      for (int k = 0; k < K; k++) begin
        beta[n][k]   = cwgt_t'(ac_beta[n][k]);
        tau_sc[n][k] = ac_tau_sc[n][k];
      end
      gtx[n]      = cwgt_t'(ac_link[0][n]);
      tau_out[n]  = ac_link[1][n];
      grx[n]      = cwgt_t'(ac_link[2][n]);
      tau_rx[n]   = ac_link[3][n];
      pl_mant[n]  = ac_link[4][n][PL_W-1:0];
      pl_shift[n] = ac_link[4][n][PL_W +: PL_SH_W];
      dop_inc[n]  = ac_link[5][n];
      dop_ph0[n]  = ac_link[6][n];
    end
  end

endmodule
