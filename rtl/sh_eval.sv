// sh_eval -- evaluates angle-dependent gains from spherical-harmonic
// coefficients and writes them into a node's parameter bank.
//
// The model stores responses compactly as coefficient vectors b over P
// spherical-harmonic basis functions; the value at an angle theta is
// psi(theta)^T b, where psi(theta) holds the basis functions evaluated at
// theta. Two forms are computed:
//
//   SINGLE:  r = sum_p psi0[p] * c[base + p]
//            (scattering responses alpha_k(theta^i), beta_k(theta^o);
//             P = 256, order 15, in the evaluated configuration)
//   PAIR:    r = sum_{d<D} conj(a_d) * g_d, with
//            a_d = sum_p psi1[p] * c[base + (2d)P   + p]   (g^s_d(theta^s))
//            g_d = sum_p psi0[p] * c[base + (2d+1)P + p]   (g_d(theta))
//            (array antenna gain G(theta^s, theta), rank D; the 13x13 array
//             fit uses D = 169 and P = 16, 2PD = 5408 numbers)
//
// The host loads coefficients once per scenario (coef_we) and, per
// evaluation, the basis vectors psi0 = psi(theta) and psi1 = psi(theta^s)
// (psi_we); evaluating the basis functions themselves is left to the host.
// A command names the form, P, D, the base address and the destination
// parameter-bank entry; when done the engine issues one write (res_valid)
// with the result rounded and saturated to Q2.14.
//
// Arithmetic: coefficients and basis values Q2.14 complex. Products are summed
// exactly; a_d and g_d are rounded to 14 fraction bits, conj(a_d)*g_d summed
// exactly and rounded at the end. Coefficient layout, number formats and the
// command interface are this design's choices.
//
// Timing: one complex MAC per clock. SINGLE takes P+2 clocks from the command
// to res_valid, PAIR 2*D*P+2. cmd_ready is low while busy.
module sh_eval
  import dp_pkg::*;
#(
  parameter int unsigned P_MAX      = 256,
  parameter int unsigned COEF_DEPTH = 16384,
  localparam int unsigned PW        = $clog2(P_MAX + 1),
  localparam int unsigned CAW       = $clog2(COEF_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // coefficient memory
  input  logic             coef_we,
  input  logic [CAW-1:0]   coef_addr,
  input  cwgt_t            coef_data,
  // basis vectors
  input  logic             psi_we,
  input  logic             psi_sel,     // 0: psi(theta), 1: psi(theta^s)
  input  logic [PW-1:0]    psi_idx,
  input  cwgt_t            psi_data,
  // command
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  logic             cmd_pair,
  input  logic [PW-1:0]    cmd_p,
  input  logic [15:0]      cmd_d,
  input  logic [CAW-1:0]   cmd_base,
  input  ptable_e          cmd_table,
  input  logic [7:0]       cmd_row,
  input  logic [7:0]       cmd_col,
  // result: one parameter-bank write
  output logic             res_valid,
  output ptable_e          res_table,
  output logic [7:0]       res_row,
  output logic [7:0]       res_col,
  output logic [31:0]      res_data
);

  cwgt_t coef [COEF_DEPTH];
  cwgt_t psi  [2][P_MAX];

  always_ff @(posedge clk) begin
    if (coef_we) coef[coef_addr] <= coef_data;
    if (psi_we && psi_idx < PW'(P_MAX)) psi[psi_sel][psi_idx[$clog2(P_MAX)-1:0]] <= psi_data;
  end

  // ---- issue stage: walk the coefficients ----
  logic           busy;
  logic           pair_q;
  logic [PW-1:0]  p_q;
  logic [15:0]    d_q;
  logic [CAW-1:0] addr;
  logic [PW-1:0]  pi_cnt;     // basis index within a segment
  logic [16:0]    seg;        // segment: PAIR 0..2D-1, SINGLE 0
  ptable_e        tab_q;
  logic [7:0]     row_q, col_q;

  logic           seg_last, all_last;
  assign seg_last  = (pi_cnt == p_q - 1'b1);
  assign all_last  = seg_last && (!pair_q || seg == {d_q, 1'b1});
  assign cmd_ready = !busy;

  // ---- MAC stage inputs (registered read) ----
  logic  m_valid, m_seg_last, m_all_last, m_odd;
  cwgt_t m_coef, m_psi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      pair_q     <= 1'b0;
      p_q        <= '0;
      d_q        <= '0;
      addr       <= '0;
      pi_cnt     <= '0;
      seg        <= '0;
      tab_q      <= T_ALPHA;
      row_q      <= '0;
      col_q      <= '0;
      m_valid    <= 1'b0;
      m_seg_last <= 1'b0;
      m_all_last <= 1'b0;
      m_odd      <= 1'b0;
    end else begin
      m_valid <= 1'b0;
      if (!busy) begin
        if (cmd_valid && cmd_p != '0 && (!cmd_pair || cmd_d != '0)) begin
          busy   <= 1'b1;
          pair_q <= cmd_pair;
          p_q    <= cmd_p;
          d_q    <= cmd_d - 1'b1;
          addr   <= cmd_base;
          pi_cnt <= '0;
          seg    <= '0;
          tab_q  <= cmd_table;
          row_q  <= cmd_row;
          col_q  <= cmd_col;
        end
      end else begin
        m_valid    <= 1'b1;
        m_seg_last <= seg_last;
        m_all_last <= all_last;
        m_odd      <= seg[0];
        addr       <= addr + 1'b1;
        if (seg_last) begin
          pi_cnt <= '0;
          seg    <= seg + 1'b1;
        end else begin
          pi_cnt <= pi_cnt + 1'b1;
        end
        if (all_last) busy <= 1'b0;
      end
    end
  end

  // coefficient and basis value for the MAC, read in the issue cycle
  always_ff @(posedge clk) begin
    m_coef <= coef[addr];
    m_psi  <= psi[(pair_q && !seg[0]) ? 1 : 0][pi_cnt[$clog2(P_MAX)-1:0]];
  end

  // ---- MAC stage ----
  logic signed [63:0] acc_re, acc_im;     // current dot product, 28 frac bits
  logic signed [63:0] a_re, a_im;         // a_d, 14 frac bits
  logic signed [63:0] g_re, g_im;         // PAIR sum, 28 frac bits
  logic signed [63:0] nx_re, nx_im, r_re, r_im, f_re, f_im;

  always_comb begin
    nx_re = acc_re + 64'(m_psi.re) * 64'(m_coef.re) - 64'(m_psi.im) * 64'(m_coef.im);
    nx_im = acc_im + 64'(m_psi.re) * 64'(m_coef.im) + 64'(m_psi.im) * 64'(m_coef.re);
    r_re  = rshift_round(nx_re, WFRAC);     // dot product, 14 frac bits
    r_im  = rshift_round(nx_im, WFRAC);
    // conj(a) * g added to the pair sum
    f_re  = g_re + a_re * r_re + a_im * r_im;
    f_im  = g_im + a_re * r_im - a_im * r_re;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_re    <= '0; acc_im <= '0;
      a_re      <= '0; a_im   <= '0;
      g_re      <= '0; g_im   <= '0;
      res_valid <= 1'b0;
      res_table <= T_ALPHA;
      res_row   <= '0;
      res_col   <= '0;
      res_data  <= '0;
    end else begin
      res_valid <= 1'b0;
      if (m_valid) begin
        if (!m_seg_last) begin
          acc_re <= nx_re;
          acc_im <= nx_im;
        end else begin
          acc_re <= '0;
          acc_im <= '0;
          if (pair_q && !m_odd) begin
            a_re <= r_re;
            a_im <= r_im;
          end else if (pair_q) begin
            g_re <= f_re;
            g_im <= f_im;
          end
          if (m_all_last) begin
            res_valid <= 1'b1;
            res_table <= tab_q;
            res_row   <= row_q;
            res_col   <= col_q;
            if (pair_q)
              res_data <= {sat_smp(rshift_round(f_re, WFRAC)), sat_smp(rshift_round(f_im, WFRAC))};
            else
              res_data <= {sat_smp(r_re), sat_smp(r_im)};
            g_re <= '0;
            g_im <= '0;
          end
        end
      end
    end
  end

endmodule
