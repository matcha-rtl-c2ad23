// fft_core: approximate multiplication-less integer FFT / IFFT core.
//
// Converts a polynomial between its coefficient list and its Lagrange
// half-complex form, the evaluations at the roots exp(i*pi*(4j+1)/N):
//   INVERSE = 0 ("IFFT" in TFHE naming, coefficient -> Lagrange): input point
//     k is the folded pair (c[k], c[k+N/2]); output position q holds the
//     evaluation for root index j = bitrev(q).
//   INVERSE = 1 ("FFT", Lagrange -> coefficient): input in that bit-reversed
//     order, output point k is (c[k], c[k+N/2]), already divided by M = N/2.
// The two directions are the same hardware with a different data flow
// (decimation in frequency vs. in time), so neither needs a bit-reversal.
//
// Blocks: an input FIFO, an output FIFO, the address generation unit
// (fft_agu), the twiddle factor buffer (twiddle_buffer) and P butterfly
// cores (lift_butterfly) working on an in-place array of M points.
// Operation: M points are popped from the input FIFO (one per cycle), the
// AGU then issues one step per cycle (P butterflies each), then the M
// results are pushed to the output FIFO (one per cycle).  The first result
// leaves the output FIFO 4 cycles + the AGU's step count after the last input
// is accepted; for N=1024, P=128 that is 512 load + 516 (either direction)
// + 4 cycles, then 512 drain cycles.
// Twiddle factors are loaded once through tw_we/tw_waddr/tw_wdata.
// The block structure (AGU, twiddle buffer, two FIFOs, 128 butterfly cores,
// 64-bit dyadic twiddles) follows the paper; the streaming protocol and the
// in-place point array are this design's own choices.
module fft_core
  import matcha_pkg::*;
#(
  parameter int N          = 1024,
  parameter int P          = 128,
  parameter bit INVERSE    = 1'b0,
  parameter int FIFO_DEPTH = 8,
  localparam int M   = N / 2,
  localparam int AW  = $clog2(M),
  localparam int TW  = $clog2(2 * N),
  localparam int TWA = $clog2(N / 2)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           tw_we,
  input  logic [TWA-1:0] tw_waddr,
  input  twid_t          tw_wdata,
  input  logic           in_valid,
  output logic           in_ready,
  input  cplx_t          in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output cplx_t          out_data,
  output logic           busy
);

  typedef enum logic [1:0] {C_LOAD, C_RUN, C_DRAIN} cstate_e;
  cstate_e state;

  cplx_t x [M];
  logic [AW:0] ptr;

  // FIFOs
  logic  ififo_valid, ififo_ready, ofifo_valid, ofifo_ready;
  cplx_t ififo_data;
  logic [$clog2(FIFO_DEPTH):0] icount, ocount;

  sync_fifo #(.W($bits(cplx_t)), .DEPTH(FIFO_DEPTH)) u_ififo (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(ififo_valid), .out_ready(ififo_ready), .out_data(ififo_data),
    .count(icount)
  );

  sync_fifo #(.W($bits(cplx_t)), .DEPTH(FIFO_DEPTH)) u_ofifo (
    .clk, .rst_n,
    .in_valid(ofifo_valid), .in_ready(ofifo_ready), .in_data(x[ptr[AW-1:0]]),
    .out_valid, .out_ready, .out_data,
    .count(ocount)
  );

  // Address generation
  logic          agu_start, agu_busy, agu_done;
  bf_mode_e      mode;
  logic          lane_valid [P];
  logic [AW-1:0] addr_a [P], addr_b [P];
  logic [TW-1:0] tw_idx [P];

  fft_agu #(.N(N), .P(P), .INVERSE(INVERSE)) u_agu (
    .clk, .rst_n,
    .start(agu_start), .advance(1'b1),
    .busy(agu_busy), .done(agu_done),
    .mode, .lane_valid, .addr_a, .addr_b, .tw_idx
  );

  // Twiddle buffer
  logic [TWA-1:0] tw_raddr [P];
  twid_t          tw_rdata [P];

  twiddle_buffer #(.N(N), .NRD(P)) u_tw (
    .clk, .we(tw_we), .waddr(tw_waddr), .wdata(tw_wdata),
    .raddr(tw_raddr), .rdata(tw_rdata)
  );

  // Butterfly cores
  cplx_t ya [P], yb [P];

  for (genvar p = 0; p < P; p++) begin : g_bf
    assign tw_raddr[p] = tw_idx[p][TWA-1:0];
    lift_butterfly u_bf (
      .mode,
      .a(x[addr_a[p]]), .b(x[addr_b[p]]),
      .tw(tw_rdata[p]), .quad(tw_idx[p][TW-1:TW-2]),
      .ya(ya[p]), .yb(yb[p])
    );
  end

  assign ififo_ready = (state == C_LOAD);
  assign ofifo_valid = (state == C_DRAIN);
  assign agu_start   = (state == C_LOAD) && ififo_valid && (32'(ptr) == M - 1);
  assign busy        = (state != C_LOAD) || (ptr != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= C_LOAD;
      ptr   <= '0;
    end else begin
      unique case (state)
        C_LOAD: if (ififo_valid) begin
          if (32'(ptr) == M - 1) begin
            ptr   <= '0;
            state <= C_RUN;
          end else ptr <= ptr + 1'b1;
        end
        C_RUN: if (agu_done) state <= C_DRAIN;
        C_DRAIN: if (ofifo_ready) begin
          if (32'(ptr) == M - 1) begin
            ptr   <= '0;
            state <= C_LOAD;
          end else ptr <= ptr + 1'b1;
        end
        default: state <= C_LOAD;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == C_LOAD && ififo_valid) x[ptr[AW-1:0]] <= ififo_data;
    if (state == C_RUN && agu_busy)
      for (int p = 0; p < P; p++)
        if (lane_valid[p]) begin
          x[addr_a[p]] <= ya[p];
          if (mode != BF_ROT) x[addr_b[p]] <= yb[p];
        end
  end

endmodule
