// boot_pipe: one bootstrapping pipeline, a TGSW cluster feeding an EP core.
//
// Runs the blind-rotation loop of a TFHE bootstrapping with the key unrolled
// MU times: NITER = n/MU steps ACC <- BKB_i [x] ACC.  The two stages are
// pipelined: in time step t the cluster builds BKB_t into one register bank
// while the EP core computes with BKB_(t-1) from the other; when both are
// finished the banks are swapped.  So a run of NITER steps takes NITER + 1
// time steps, each as long as the slower of the two stages.
//
// Interface: ACC is loaded into and read from the EP core through acc_*;
// `start` with `niter` begins a run; one set of MU rounded mask values
// (abar) is taken, with abar_valid/abar_ready, at the start of each build;
// the key-bundle values arrive on the bk_* stream in the cluster's order.
// `done` pulses at the end; `overlap_cycles` counts the cycles in which both
// stages were busy at once (the pipelining at work).
// The pipeline organisation is the paper's; the handshakes and counters are
// this design's own.
module boot_pipe
  import matcha_pkg::*;
#(
  parameter int N       = 1024,
  parameter int P       = 128,
  parameter int LEV     = 3,
  parameter int BG_BITS = 10,
  parameter int MU      = 3,
  parameter int NSCALE  = 4,
  parameter int NIFFT   = 4,
  localparam int M   = N / 2,
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
  input  logic           acc_we,
  input  logic [NA-1:0]  acc_waddr,
  input  logic [31:0]    acc_wdata_a,
  input  logic [31:0]    acc_wdata_b,
  input  logic [NA-1:0]  acc_raddr,
  output logic [31:0]    acc_rdata_a,
  output logic [31:0]    acc_rdata_b,
  input  logic           start,
  input  logic [15:0]    niter,
  input  logic           abar_valid,
  output logic           abar_ready,
  input  logic [EW-1:0]  abar [MU],
  input  logic           bk_valid,
  output logic           bk_ready,
  input  cplx_t          bk_data [NSCALE],
  output logic           busy,
  output logic           done,
  output logic [31:0]    overlap_cycles
);

  localparam int ROWS = 2 * LEV;
  localparam int MA   = $clog2(M);
  localparam int RA   = $clog2(ROWS);

  logic c_start, c_busy, c_done, swap;
  logic e_start, e_busy, e_done;
  logic [RA-1:0] bkb_row;
  logic          bkb_col;
  logic [MA-1:0] bkb_pt;
  cplx_t         bkb_data;

  tgsw_cluster #(.N(N), .LEV(LEV), .BG_BITS(BG_BITS), .MU(MU), .NSCALE(NSCALE)) u_cluster (
    .clk, .rst_n, .rt_we, .rt_waddr, .rt_wdata,
    .start(c_start), .abar, .busy(c_busy), .done(c_done),
    .bk_valid, .bk_ready, .bk_data,
    .swap, .bkb_row, .bkb_col, .bkb_pt, .bkb_data);

  ep_core #(.N(N), .P(P), .LEV(LEV), .BG_BITS(BG_BITS), .NIFFT(NIFFT)) u_ep (
    .clk, .rst_n, .tw_we, .tw_waddr, .tw_wdata,
    .acc_we, .acc_waddr, .acc_wdata_a, .acc_wdata_b,
    .acc_raddr, .acc_rdata_a, .acc_rdata_b,
    .bkb_row, .bkb_col, .bkb_pt, .bkb_data,
    .start(e_start), .busy(e_busy), .done(e_done));

  typedef enum logic [2:0] {B_IDLE, B_BUILD, B_WAIT, B_SWAP, B_LAST} bstate_e;
  bstate_e state;

  logic [15:0] built, used;      // bundles built / consumed
  logic        c_fin, e_fin;     // stage finished in this time step

  assign abar_ready = (state == B_BUILD) && abar_valid && !c_busy && (built < niter);
  assign c_start    = abar_ready;
  assign busy       = (state != B_IDLE);

  always_ff @(posedge clk) begin
    done    <= 1'b0;
    swap    <= 1'b0;
    e_start <= 1'b0;
    if (!rst_n) begin
      state <= B_IDLE;
      built <= '0;
      used  <= '0;
      c_fin <= 1'b0;
      e_fin <= 1'b0;
      overlap_cycles <= '0;
    end else begin
      if (c_busy && e_busy) overlap_cycles <= overlap_cycles + 1'b1;
      if (c_done) c_fin <= 1'b1;
      if (e_done) e_fin <= 1'b1;
      unique case (state)
        B_IDLE: if (start && niter != '0) begin
          state <= B_BUILD;
          built <= '0;
          used  <= '0;
          overlap_cycles <= '0;
          c_fin <= 1'b0;
          e_fin <= 1'b1;          // no EP step in the first time step
        end
        // time step: the cluster builds bundle `built` while the EP core
        // consumes bundle `used` (started on entry by B_SWAP)
        B_BUILD: if (abar_ready) begin
          built <= built + 1'b1;
          state <= B_WAIT;
        end
        B_WAIT: if ((c_fin || c_done) && (e_fin || e_done)) state <= B_SWAP;
        B_SWAP: begin
          swap  <= 1'b1;
          c_fin <= 1'b0;
          e_fin <= 1'b0;
          e_start <= 1'b1;
          if (built == niter) state <= B_LAST;
          else state <= B_BUILD;
        end
        B_LAST: if (e_done) begin
          used  <= used + 1'b1;
          state <= B_IDLE;
          done  <= 1'b1;
        end
        default: state <= B_IDLE;
      endcase
      if (e_done && state != B_LAST) used <= used + 1'b1;
    end
  end

endmodule
