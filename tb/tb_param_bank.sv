// tb_param_bank -- writes every table through the host port and checks the
// double buffering: writes stay invisible until a swap, force_update swaps
// at once, the period counter swaps after exactly UPDATE_SAMPLES samples
// (counting samples, not clocks), period_start marks the first sample of a
// period, and writes outside a table are ignored.
// Runs with K = 2 and a 10-sample update period instead of 3.25 million
// samples, so that many period boundaries pass in a short run.
module tb_param_bank;
  import dp_pkg::*;

  localparam int unsigned N = 3, K = 2, UPD = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid, force_update, wr_en;
  ptable_e            wr_table;
  logic [7:0]         wr_row, wr_col;
  logic [31:0]        wr_data;
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

  param_bank #(.N(N), .K(K), .UPDATE_SAMPLES(UPD)) dut (.*);

  int checks = 0, failures = 0;

  // model of the shadow and active tables: [table][row][col]
  logic [31:0] m_sh [11][4][4];
  logic [31:0] m_ac [11][4][4];

  function automatic logic [31:0] got(input int tb, input int r, input int c);
    case (tb)
      0:  return alpha[r][c];
      1:  return tau_in[r][c];
      2:  return beta[r][c];
      3:  return tau_sc[r][c];
      4:  return gtx[r];
      5:  return tau_out[r];
      6:  return grx[r];
      7:  return tau_rx[r];
      8:  return {10'd0, pl_shift[r], pl_mant[r]};
      9:  return dop_inc[r];
      default: return dop_ph0[r];
    endcase
  endfunction

  task automatic compare(input string where);
    for (int tb = 0; tb < 11; tb++) begin
      int nr, nc;
      nr = (tb < 2) ? K : N;
      nc = (tb < 2) ? N : (tb < 4) ? K : 1;
      for (int r = 0; r < nr; r++)
        for (int c = 0; c < nc; c++) begin
          logic [31:0] e;
          e = m_ac[tb][r][c];
          if (tb == 8) e = {10'd0, e[21:0]};
          checks++;
          if (got(tb, r, c) !== e) begin
            failures++;
            if (failures < 10) $display("%s: table %0d [%0d][%0d] got %h exp %h", where, tb, r, c, got(tb, r, c), e);
          end
        end
    end
  endtask

  task automatic write_all();
    for (int tb = 0; tb < 11; tb++) begin
      int nr, nc;
      nr = (tb < 2) ? K : N;
      nc = (tb < 2) ? N : (tb < 4) ? K : 1;
      for (int r = 0; r < nr; r++)
        for (int c = 0; c < nc; c++) begin
          @(negedge clk);
          wr_en = 1'b1;
          wr_table = ptable_e'(tb);
          wr_row = 8'(r);
          wr_col = 8'(c);
          wr_data = $urandom;
          m_sh[tb][r][c] = wr_data;
        end
    end
    // out of range: must be ignored
    @(negedge clk);
    wr_table = T_ALPHA; wr_row = 8'(K); wr_col = 8'd0; wr_data = $urandom;
    @(negedge clk);
    wr_table = T_GTX; wr_row = 8'(N); wr_col = 8'd0;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 1'b0; force_update = 1'b0; wr_en = 1'b0;
    wr_table = T_ALPHA; wr_row = '0; wr_col = '0; wr_data = '0;
    for (int a = 0; a < 11; a++) for (int b = 0; b < 4; b++) for (int c = 0; c < 4; c++) begin
      m_sh[a][b][c] = '0; m_ac[a][b][c] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare("after reset");
    checks++; if (!period_start) failures++;

    write_all();
    compare("before force");                // shadow only
    force_update = 1'b1;
    @(negedge clk);
    force_update = 1'b0;
    m_ac = m_sh;
    compare("after force");
    checks++; if (!period_start) failures++;

    // new shadow values, then count samples (with gaps) up to the swap
    write_all();
    for (int s = 0; s < UPD; s++) begin
      in_valid = 1'b1;
      #1;
      checks++;
      if (period_start !== (s == 0)) begin
        failures++;
        $display("period_start wrong at sample %0d", s);
      end
      compare("inside period");
      @(negedge clk);
      in_valid = 1'b0;
      if (s % 3 == 1) @(negedge clk);
    end
    m_ac = m_sh;
    compare("after period");
    checks++; if (!period_start) failures++;
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    checks++; if (period_start) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
