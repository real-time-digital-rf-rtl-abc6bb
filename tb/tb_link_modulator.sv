// tb_link_modulator -- checks path loss and Doppler rotation of a link
// against y = C exp(-j phi) y' computed with real cos/sin, over three update
// periods with different path loss, phase step and start phase, with gaps
// in the sample stream (the phase advances per sample, not per clock), and
// checks the 2-clock latency.
// Runs at the default sizes; the reference uses exact cos/sin of the
// table's rounded phase, so the test checks the table contents as well.
module tb_link_modulator;
  import dp_pkg::*;
  import tb_ref_pkg::*;

  localparam int T = 900;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid, load;
  cplx_t              y_in;
  logic [PL_W-1:0]    pl_mant;
  logic [PL_SH_W-1:0] pl_shift;
  logic [31:0]        dop_inc, dop_ph0;
  logic               y_valid;
  cplx_t              y;

  link_modulator dut (.*);

  int checks = 0, failures = 0;
  rc_t exp_arr [T];
  int  n_exp = 0, n_got = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      checks++;
      if (n_got >= n_exp || !close(y, exp_arr[n_got], 2.0)) begin
        failures++;
        if (failures < 10) $display("t=%0d got %0d,%0d exp %f,%f", n_got, y.re, y.im,
                                    exp_arr[n_got].re, exp_arr[n_got].im);
      end
      n_got <= n_got + 1;
    end
  end

  function automatic real qtrig(input real ang, input bit want_sin);
    real v;
    v = want_sin ? $sin(ang) : $cos(ang);
    v = $floor(v * 32768.0 + 0.5);
    if (v > 32767.0) v = 32767.0;
    return v;
  endfunction

  initial begin
    logic [31:0] phase;
    logic [31:0] inc_c;
    real         c_pl;
    int          cyc;
    in_valid = 1'b0;
    load = 1'b0;
    y_in = '0;
    pl_mant = '0; pl_shift = '0; dop_inc = '0; dop_ph0 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < T; t++) begin
      rc_t  r, e;
      real  ang, cs, sn;
      logic [31:0] pr;
      if (t % 300 == 0) begin
        pl_mant  = PL_W'($urandom_range(2 ** PL_W - 1, 1000));
        pl_shift = (t == 600) ? 5'd3 : 5'd0;
        dop_inc  = $urandom;
        dop_ph0  = $urandom;
        load     = 1'b1;
        phase    = dop_ph0;
        inc_c    = dop_inc;
        c_pl     = real'(pl_mant) / (65536.0 * real'(2 ** pl_shift));
      end else begin
        load     = 1'b0;
        // the link numbers may change between loads without effect
        pl_mant  = PL_W'($urandom);
        dop_inc  = $urandom;
        dop_ph0  = $urandom;
      end
      y_in = rand_smp(10000);
      pr   = phase + 32'h0020_0000;          // round to a 10-bit phase
      ang  = 2.0 * PI * real'(pr[31:22]) / 1024.0;
      cs   = qtrig(ang, 1'b0);
      sn   = qtrig(ang, 1'b1);
      r    = rc($floor((real'(y_in.re) * cs + real'(y_in.im) * sn) / 32768.0 + 0.5),
                $floor((real'(y_in.im) * cs - real'(y_in.re) * sn) / 32768.0 + 0.5));
      e    = rc_scale(r, c_pl);
      exp_arr[n_exp] = e;
      n_exp++;
      phase = phase + inc_c;
      in_valid = 1'b1;
      @(negedge clk);
      load = 1'b0;
      if (t % 37 == 3) begin
        in_valid = 1'b0;
        repeat (2) @(negedge clk);
      end
    end
    in_valid = 1'b0;
    cyc = 0;
    while (n_got != n_exp && cyc < 10) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 2) begin
      failures++;
      $display("latency check: %0d clocks, expected 2", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
