// twiddle_buffer: the twiddle factor buffer of an FFT/IFFT core.
//
// Holds one dyadic lifting-coefficient pair {p, s} (matcha_pkg::twid_t) for
// every angle theta_r = pi*r/N, r = 0 .. N/2-1, i.e. the first quarter of the
// 2N-point angle grid used by the transforms; the other quarters are reached
// by exact quarter turns in the butterfly.  The table is written once through
// the write port (one entry per cycle) and read through NRD asynchronous read
// ports, one per butterfly core, so all cores get their factor in the same
// cycle.  The paper names the buffer and its 64-bit dyadic quantization; the
// quarter-wave layout, the port count and the load port are this design's own.
module twiddle_buffer
  import matcha_pkg::*;
#(
  parameter int N   = 1024,            // ring dimension
  parameter int NRD = 128,             // read ports
  localparam int DEPTH = N / 2,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  twid_t             wdata,
  input  logic [AW-1:0]     raddr [NRD],
  output twid_t             rdata [NRD]
);

  twid_t mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  always_comb
    for (int i = 0; i < NRD; i++) rdata[i] = mem[raddr[i]];

endmodule
