// matcha_top: the MATCHA bootstrapping datapath.
//
// NPIPE bootstrapping pipelines (boot_pipe), each a TGSW cluster paired with
// an External Product core, run independent TFHE blind rotations side by
// side, one per gate being bootstrapped.  Twiddle factors and the root table
// are broadcast to all pipelines; every pipeline has its own ACC port, mask
// (abar) handshake and key-bundle stream.  In the full chip these streams
// come from the 32-bank scratchpad through crossbars and the HBM2 memory
// controller, and the polynomial unit prepares ACC and the abar values and
// finishes the gate (sample extraction, key switching); those parts are not
// part of this RTL, so their connections are the ports of this module.
// Defaults: 8 pipelines, N = 1024, Bg = 2^10, l = 3, key unrolling m = 3,
// 128 butterfly cores per FFT/IFFT core.
module matcha_top
  import matcha_pkg::*;
#(
  parameter int NPIPE   = 8,
  parameter int N       = 1024,
  parameter int P       = 128,
  parameter int LEV     = 3,
  parameter int BG_BITS = 10,
  parameter int MU      = 3,
  parameter int NSCALE  = 4,
  parameter int NIFFT   = 4,
  localparam int EW  = $clog2(2 * N),
  localparam int NA  = $clog2(N),
  localparam int TWA = $clog2(N / 2)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           tw_we,
  input  logic [TWA-1:0] tw_waddr,
  input  twid_t          tw_wdata,
  input  logic           rt_we,
  input  logic [EW-1:0]  rt_waddr,
  input  root_t          rt_wdata,
  input  logic           acc_we      [NPIPE],
  input  logic [NA-1:0]  acc_waddr   [NPIPE],
  input  logic [31:0]    acc_wdata_a [NPIPE],
  input  logic [31:0]    acc_wdata_b [NPIPE],
  input  logic [NA-1:0]  acc_raddr   [NPIPE],
  output logic [31:0]    acc_rdata_a [NPIPE],
  output logic [31:0]    acc_rdata_b [NPIPE],
  input  logic           start       [NPIPE],
  input  logic [15:0]    niter       [NPIPE],
  input  logic           abar_valid  [NPIPE],
  output logic           abar_ready  [NPIPE],
  input  logic [EW-1:0]  abar        [NPIPE][MU],
  input  logic           bk_valid    [NPIPE],
  output logic           bk_ready    [NPIPE],
  input  cplx_t          bk_data     [NPIPE][NSCALE],
  output logic           busy        [NPIPE],
  output logic           done        [NPIPE],
  output logic [31:0]    overlap_cycles [NPIPE]
);

  for (genvar g = 0; g < NPIPE; g++) begin : g_pipe
    boot_pipe #(.N(N), .P(P), .LEV(LEV), .BG_BITS(BG_BITS), .MU(MU),
                .NSCALE(NSCALE), .NIFFT(NIFFT)) u_pipe (
      .clk, .rst_n, .tw_we, .tw_waddr, .tw_wdata, .rt_we, .rt_waddr, .rt_wdata,
      .acc_we(acc_we[g]), .acc_waddr(acc_waddr[g]),
      .acc_wdata_a(acc_wdata_a[g]), .acc_wdata_b(acc_wdata_b[g]),
      .acc_raddr(acc_raddr[g]), .acc_rdata_a(acc_rdata_a[g]), .acc_rdata_b(acc_rdata_b[g]),
      .start(start[g]), .niter(niter[g]),
      .abar_valid(abar_valid[g]), .abar_ready(abar_ready[g]), .abar(abar[g]),
      .bk_valid(bk_valid[g]), .bk_ready(bk_ready[g]), .bk_data(bk_data[g]),
      .busy(busy[g]), .done(done[g]), .overlap_cycles(overlap_cycles[g]));
  end

endmodule
