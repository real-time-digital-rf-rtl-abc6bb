// sample_buffer -- circular sample history with NRD read ports, each returning
// the four consecutive samples a 4-tap fractional-delay filter needs.
//
// This is the storage of the direct-path node: short histories of the
// received signals (for the per-scatterer delays tau_{n,k} and receiver
// offsets) and the long buffers of the intermediate signals v_{m,k} and of the
// transmit signal, whose depth sets the largest emulated range
// (2^23 = 8.4e6 samples, 500 km round trip at 2.5 GS/s).
//
// Each in_valid writes one sample (the sample of time t). In the same clock
// every read port r, given an integer delay n = rd_delay[r], returns
//   taps[r][j] = x(t - n + 1 - j),  j = 0..3
// so that taps[r][1] is the sample n periods old. n is clamped to
// [1, DEPTH-3]; n = 1 makes taps[r][0] the sample being written, which is
// bypassed from the input. Samples from before the first write (and, after
// reset, any sample never written) read as zero: a fill counter marks how much
// history is valid, so the memory itself needs no clearing. Memory reads are
// read-before-write, so the array maps to a one-write, NRD*4-read RAM.
//
// Timing: taps/out_valid are registered, one clock after in_valid.
module sample_buffer
  import dp_pkg::*;
#(
  parameter int unsigned DEPTH = 256,            // power of two
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  cplx_t         din,
  input  logic [AW-1:0] rd_delay [NRD],
  output logic          out_valid,
  output cplx_t         taps [NRD][TAPS]
);

  cplx_t         mem [DEPTH];
  logic [AW-1:0] wptr;
  logic [AW:0]   fill;       // number of valid samples, saturates at DEPTH

  logic [AW:0]   fill_new;
  assign fill_new = (fill == (AW+1)'(DEPTH)) ? fill : fill + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      fill      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        wptr <= wptr + 1'b1;
        fill <= fill_new;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) mem[wptr] <= din;
  end

  for (genvar r = 0; r < NRD; r++) begin : g_rd
    logic [AW-1:0] n;
    assign n = (rd_delay[r] < AW'(1))         ? AW'(1) :
               (rd_delay[r] > AW'(DEPTH - 3)) ? AW'(DEPTH - 3) : rd_delay[r];
    for (genvar j = 0; j < TAPS; j++) begin : g_tap
      logic [AW:0]   age;   // 0 = sample being written
      logic [AW-1:0] addr;
      assign age  = (AW+1)'(n) - 1'b1 + (AW+1)'(j);
      assign addr = wptr - AW'(age);
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)               taps[r][j] <= '0;
        else if (in_valid) begin
          if (age >= fill_new)    taps[r][j] <= '0;
          else if (age == '0)     taps[r][j] <= din;
          else                    taps[r][j] <= mem[addr];
        end
      end
    end
  end

endmodule
