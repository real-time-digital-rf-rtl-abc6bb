// dp_emulator -- direct-path RF channel emulator: N computational nodes
// (dp_node) joined as a fully connected graph.
//
// Each emulated object is one node. Node m's output for node l, y_{m,l}, is
// node l's input from m; the connection passes LINK_REGS register stages,
// which stand for the network link between two nodes. Every node also has a
// spherical-harmonic evaluator (sh_eval) that turns stored angular responses
// into the weights its parameter bank needs. The transmit signal of every
// object enters at tx_in and every object's receiver signal leaves at rx_out;
// the signals between objects never leave the chip.
//
// Streaming: one complex sample per clock for every object, in_valid high
// throughout a run (checked by an assertion); all nodes share the strobe.
// Link delays are exact in samples: a node subtracts the node and link
// latency from the programmed tau. rx_out[m] follows the arriving signals by
// 3 clocks plus TAU_BIAS samples.
//
// Host interface: a parameter write port addressed by node, table, row and
// column (hw_*), and a port into the selected node's sh_eval (coefficients,
// basis vectors, commands; sh_*). A node's sh_eval result is written into its
// parameter bank in the clock it appears; a host write to the same node in
// that clock is held off (hw_ready low) and must be repeated. force_update
// makes every node take its new parameters at once; otherwise they swap
// together every UPDATE_SAMPLES samples.
//
// Default sizes: 3 nodes (the largest scenario the model is demonstrated
// with), K = 16 scatterers, long buffers of 2^23 samples (500 km at
// 2.5 GS/s), 1.3 ms update period, P up to 256 coefficients per response.
//
// Lint note: rst_n is used both as the asynchronous reset and in the
// 'disable iff' of the stream assertion; the second use is in a check only,
// not in logic, so the mixed synchronous/asynchronous warning stands.
module dp_emulator
  import dp_pkg::*;
#(
  parameter int unsigned N              = 3,
  parameter int unsigned K              = 16,
  parameter int unsigned DEPTH_IN       = 256,
  parameter int unsigned DEPTH_OUT      = 2**23,
  parameter int unsigned UPDATE_SAMPLES = 3250000,
  parameter int unsigned LINK_REGS      = 1,
  parameter int unsigned P_MAX          = 256,
  parameter int unsigned COEF_DEPTH     = 16384,
  localparam int unsigned PW            = $clog2(P_MAX + 1),
  localparam int unsigned CAW           = $clog2(COEF_DEPTH),
  localparam int unsigned NW            = (N > 1) ? $clog2(N) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  cplx_t          tx_in  [N],
  output logic           rx_valid,
  output cplx_t          rx_out [N],
  // parameter writes
  input  logic           force_update,
  input  logic           hw_en,
  input  logic [NW-1:0]  hw_node,
  input  ptable_e        hw_table,
  input  logic [7:0]     hw_row,
  input  logic [7:0]     hw_col,
  input  logic [31:0]    hw_data,
  output logic           hw_ready,
  // spherical-harmonic evaluators
  input  logic [NW-1:0]  sh_node,
  input  logic           sh_coef_we,
  input  logic [CAW-1:0] sh_coef_addr,
  input  cwgt_t          sh_coef_data,
  input  logic           sh_psi_we,
  input  logic           sh_psi_sel,
  input  logic [PW-1:0]  sh_psi_idx,
  input  cwgt_t          sh_psi_data,
  input  logic           sh_cmd_valid,
  output logic           sh_cmd_ready,
  input  logic           sh_cmd_pair,
  input  logic [PW-1:0]  sh_cmd_p,
  input  logic [15:0]    sh_cmd_d,
  input  logic [CAW-1:0] sh_cmd_base,
  input  ptable_e        sh_cmd_table,
  input  logic [7:0]     sh_cmd_row,
  input  logic [7:0]     sh_cmd_col
);

  localparam int unsigned NODE_LAT = 8;

  cplx_t y_link  [N][N];                // y_link[m][l]: node m -> node l
  cplx_t s_link  [N][N];                // s_link[l][m]: what node l gets from m
  logic  y_valid [N];
  logic  r_valid [N];

  logic        e_valid [N];
  ptable_e     e_table [N];
  logic [7:0]  e_row   [N];
  logic [7:0]  e_col   [N];
  logic [31:0] e_data  [N];
  logic        e_ready [N];

  for (genvar m = 0; m < N; m++) begin : g_node
    logic        wr_en;
    ptable_e     wr_table;
    logic [7:0]  wr_row, wr_col;
    logic [31:0] wr_data;
    logic        host_sel;

    assign host_sel = hw_en && (hw_node == NW'(m));
    always_comb begin
      if (e_valid[m]) begin
        wr_en = 1'b1; wr_table = e_table[m]; wr_row = e_row[m]; wr_col = e_col[m]; wr_data = e_data[m];
      end else begin
        wr_en = host_sel; wr_table = hw_table; wr_row = hw_row; wr_col = hw_col; wr_data = hw_data;
      end
    end

    sh_eval #(.P_MAX(P_MAX), .COEF_DEPTH(COEF_DEPTH)) u_sh (
      .clk, .rst_n,
      .coef_we  (sh_coef_we && sh_node == NW'(m)),
      .coef_addr(sh_coef_addr),
      .coef_data(sh_coef_data),
      .psi_we   (sh_psi_we && sh_node == NW'(m)),
      .psi_sel  (sh_psi_sel),
      .psi_idx  (sh_psi_idx),
      .psi_data (sh_psi_data),
      .cmd_valid(sh_cmd_valid && sh_node == NW'(m)),
      .cmd_ready(e_ready[m]),
      .cmd_pair (sh_cmd_pair),
      .cmd_p    (sh_cmd_p),
      .cmd_d    (sh_cmd_d),
      .cmd_base (sh_cmd_base),
      .cmd_table(sh_cmd_table),
      .cmd_row  (sh_cmd_row),
      .cmd_col  (sh_cmd_col),
      .res_valid(e_valid[m]),
      .res_table(e_table[m]),
      .res_row  (e_row[m]),
      .res_col  (e_col[m]),
      .res_data (e_data[m])
    );

    dp_node #(
      .N(N), .K(K), .SELF(m), .DEPTH_IN(DEPTH_IN), .DEPTH_OUT(DEPTH_OUT),
      .UPDATE_SAMPLES(UPDATE_SAMPLES), .LINK_LAT(NODE_LAT + LINK_REGS)
    ) u_node (
      .clk, .rst_n, .in_valid,
      .tx_in       (tx_in[m]),
      .s_link      (s_link[m]),
      .force_update(force_update),
      .wr_en, .wr_table, .wr_row, .wr_col, .wr_data,
      .y_valid     (y_valid[m]),
      .y_link      (y_link[m]),
      .r_valid     (r_valid[m]),
      .r_out       (rx_out[m])
    );
  end

  // Fully connected network: LINK_REGS register stages per directed link. A
  // link carries zero while its sender has no valid sample.
  cplx_t net [LINK_REGS + 1][N][N];
  always_comb begin
    for (int m = 0; m < N; m++)
      for (int l = 0; l < N; l++) net[0][m][l] = y_valid[m] ? y_link[m][l] : '0;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= LINK_REGS; i++)
        for (int m = 0; m < N; m++)
          for (int l = 0; l < N; l++) net[i][m][l] <= '0;
    end else begin
      for (int i = 1; i <= LINK_REGS; i++) net[i] <= net[i-1];
    end
  end
  always_comb begin
    for (int l = 0; l < N; l++)
      for (int m = 0; m < N; m++)
        s_link[l][m] = net[LINK_REGS][m][l];
  end

  assign rx_valid     = r_valid[0];
  assign hw_ready     = !(hw_en && e_valid[hw_node]);
  assign sh_cmd_ready = e_ready[sh_node];

  // A run is one unbroken sample stream: link delays are counted in clocks.
  logic started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        started <= 1'b0;
    else if (in_valid) started <= 1'b1;
  end
  a_stream: assert property (@(posedge clk) disable iff (!rst_n) started |-> in_valid)
    else $error("sample stream interrupted");

endmodule
