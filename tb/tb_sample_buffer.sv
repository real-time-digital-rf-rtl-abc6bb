// tb_sample_buffer -- writes a numbered sample sequence into a small buffer
// and checks every read port's four taps against the sequence, including
// the zero history before the first write, the bypass at delay 1, the
// clamping of out-of-range delays and the one-clock latency.
// Runs at DEPTH = 64 with three read ports so that the pointer wraps many
// times in a short run (the node uses 256 and 2^23); stream gaps are
// inserted to show that only in_valid advances the history.
module tb_sample_buffer;
  import dp_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned NRD   = 3;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          in_valid;
  cplx_t         din;
  logic [AW-1:0] rd_delay [NRD];
  logic          out_valid;
  cplx_t         taps [NRD][TAPS];

  int checks = 0, failures = 0;

  sample_buffer #(.DEPTH(DEPTH), .NRD(NRD)) dut (.*);

  function automatic cplx_t seq(input int t);
    cplx_t c;
    if (t < 0) return '0;
    c.re = smp_t'(t * 7 + 1);
    c.im = smp_t'(-t * 3 - 2);
    return c;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_eff [NRD];
    in_valid = 1'b0;
    din = '0;
    for (int r = 0; r < NRD; r++) rd_delay[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      // a gap now and then: the buffer counts samples, not clocks
      if (t % 17 == 5) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      in_valid = 1'b1;
      din = seq(t);
      for (int r = 0; r < NRD; r++) begin
        rd_delay[r] = (t % 23 == 0) ? AW'(r) : AW'($urandom_range(DEPTH - 1, 0));
        n_eff[r] = (rd_delay[r] < 1) ? 1 : (rd_delay[r] > DEPTH - 3) ? DEPTH - 3 : int'(rd_delay[r]);
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) failures++;
      for (int r = 0; r < NRD; r++)
        for (int j = 0; j < TAPS; j++) begin
          checks++;
          if (taps[r][j] != seq(t - n_eff[r] + 1 - j)) begin
            failures++;
            if (failures < 10) $display("t=%0d r=%0d n=%0d j=%0d got %0d", t, r, n_eff[r], j, taps[r][j].re);
          end
        end
    end
    @(negedge clk);
    in_valid = 1'b0;
    @(posedge clk);
    #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
