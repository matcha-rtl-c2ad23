// ep_core: External Product (EP) core, ACC <- BKB [x] ACC.
//
// ACC is a TLWE sample (a, b) of two torus polynomials of N 32-bit
// coefficients, held here in coefficient form.  BKB, the bootstrapping key
// bundle, is a TGSW sample of 2*LEV rows x 2 columns of polynomials, given
// in the Lagrange domain (bit-reversed point order, as the IFFT cores
// produce it) and read from the TGSW cluster's register bank.  One external
// product is
//   1. gadget decomposition: each coefficient of a and of b is split into LEV
//      signed digits of BG_BITS bits (rounded, digits in [-Bg/2, Bg/2)),
//      giving 2*LEV integer polynomials, row r = col*LEV + level;
//   2. the digit polynomials, scaled by 2^DSHIFT so that the transform's
//      rounding errors stay far below one digit unit, go through the NIFFT
//      IFFT cores (coefficient -> Lagrange), NIFFT at a time;
//   3. for each output column c and Lagrange point q, one complex
//      multiply-accumulate per cycle (four multipliers, four adders) forms
//      sum_r D[r][q] * BKB[r][c][q] / 2^DSHIFT (products are 128 bits wide);
//   4. the FFT core turns each column back to coefficients (dividing by N/2),
//      and the low 32 bits of each coefficient become the new ACC.
// Timing: start -> done takes ceil(2*LEV/NIFFT) IFFT rounds plus
// 2*(2*LEV*N/2 + FFT drain) cycles; for N=1024, LEV=3, NIFFT=4, P=128 about
// 12,000 cycles.  ACC is loaded and read through acc_we/acc_waddr and
// acc_raddr; the twiddle buffers of all five transform cores are loaded
// together through tw_we.
// The block set (one FFT core, four IFFT cores, four multipliers and adders,
// TFHE's decomposition with Bg=1024, l=3) follows the paper; the sequencing,
// 64-bit multiply width and the single register-array storage in place of the
// paper's eight register banks are this design's own choices.
module ep_core
  import matcha_pkg::*;
#(
  parameter int N       = 1024,
  parameter int P       = 128,
  parameter int LEV     = 3,      // decomposition length l
  parameter int BG_BITS = 10,     // log2(Bg)
  parameter int NIFFT   = 4,
  parameter int DSHIFT  = 24,     // digits enter the IFFT scaled by 2^DSHIFT
  localparam int M    = N / 2,
  localparam int ROWS = 2 * LEV,
  localparam int NA   = $clog2(N),
  localparam int MA   = $clog2(M),
  localparam int RA   = $clog2(ROWS),
  localparam int TWA  = $clog2(N / 2)
) (
  input  logic            clk,
  input  logic            rst_n,
  // twiddle factors of all transform cores
  input  logic            tw_we,
  input  logic [TWA-1:0]  tw_waddr,
  input  twid_t           tw_wdata,
  // ACC access (coefficient form)
  input  logic            acc_we,
  input  logic [NA-1:0]   acc_waddr,
  input  logic [31:0]     acc_wdata_a,
  input  logic [31:0]     acc_wdata_b,
  input  logic [NA-1:0]   acc_raddr,
  output logic [31:0]     acc_rdata_a,
  output logic [31:0]     acc_rdata_b,
  // BKB read port (Lagrange domain)
  output logic [RA-1:0]   bkb_row,
  output logic            bkb_col,
  output logic [MA-1:0]   bkb_pt,
  input  cplx_t           bkb_data,
  // control
  input  logic            start,
  output logic            busy,
  output logic            done
);

  localparam int ROUNDS = (ROWS + NIFFT - 1) / NIFFT;
  localparam int PW     = 2 * CW;   // product width

  // ---------------------------------------------------------------- storage
  logic [31:0] acc_a [N];
  logic [31:0] acc_b [N];
  cplx_t       dig   [ROWS][M];

  assign acc_rdata_a = acc_a[acc_raddr];
  assign acc_rdata_b = acc_b[acc_raddr];

  // TFHE signed gadget decomposition of one torus value, digit `lvl`.
  function automatic word_t decomp(input logic [31:0] v, input int lvl);
    logic [31:0] offset, buf_v, d;
    offset = 32'd1 << (32 - LEV * BG_BITS - 1);
    for (int p = 1; p <= LEV; p++)
      offset = offset + ((32'd1 << (BG_BITS - 1)) << (32 - p * BG_BITS));
    buf_v = v + offset;
    d = (buf_v >> (32 - (lvl + 1) * BG_BITS)) & ((32'd1 << BG_BITS) - 1);
    return (word_t'(d) - word_t'(1 << (BG_BITS - 1))) <<< DSHIFT;
  endfunction

  // ---------------------------------------------------------------- control
  typedef enum logic [2:0] {E_IDLE, E_IFEED, E_ICOLLECT, E_MAC, E_FDRAIN, E_DONE} estate_e;
  estate_e state;

  logic [$clog2(ROUNDS+1)-1:0] round;
  logic [MA:0]                 k;         // point counter
  logic [RA:0]                 r;         // row counter in MAC
  logic                        col;
  cplx_t                       macc;

  // IFFT cores
  logic  i_in_valid  [NIFFT], i_in_ready  [NIFFT];
  logic  i_out_valid [NIFFT], i_out_ready [NIFFT];
  cplx_t i_in_data   [NIFFT], i_out_data  [NIFFT];
  logic  i_busy      [NIFFT];
  logic  i_act       [NIFFT];
  logic  all_in_ready, all_out_valid;

  for (genvar u = 0; u < NIFFT; u++) begin : g_ifft
    localparam int UR = u;
    always_comb begin
      int row;
      row = 32'(round) * NIFFT + UR;
      i_act[u] = (row < ROWS);
      i_in_data[u].re = i_act[u] ? decomp(row < LEV ? acc_a[k[MA-1:0]] : acc_b[k[MA-1:0]], row % LEV) : '0;
      i_in_data[u].im = i_act[u] ? decomp(row < LEV ? acc_a[M + 32'(k[MA-1:0])] : acc_b[M + 32'(k[MA-1:0])], row % LEV) : '0;
    end
    assign i_in_valid[u]  = (state == E_IFEED) && i_act[u] && all_in_ready;
    assign i_out_ready[u] = (state == E_ICOLLECT) && i_act[u] && all_out_valid;
    fft_core #(.N(N), .P(P), .INVERSE(1'b0)) u_ifft (
      .clk, .rst_n, .tw_we, .tw_waddr, .tw_wdata,
      .in_valid(i_in_valid[u]), .in_ready(i_in_ready[u]), .in_data(i_in_data[u]),
      .out_valid(i_out_valid[u]), .out_ready(i_out_ready[u]), .out_data(i_out_data[u]),
      .busy(i_busy[u]));
  end

  always_comb begin
    all_in_ready  = 1'b1;
    all_out_valid = 1'b1;
    for (int u = 0; u < NIFFT; u++)
      if (i_act[u]) begin
        all_in_ready  = all_in_ready  && i_in_ready[u];
        all_out_valid = all_out_valid && i_out_valid[u];
      end
  end

  // FFT core
  logic  f_in_valid, f_in_ready, f_out_valid, f_out_ready, f_busy;
  cplx_t f_in_data, f_out_data;

  fft_core #(.N(N), .P(P), .INVERSE(1'b1)) u_fft (
    .clk, .rst_n, .tw_we, .tw_waddr, .tw_wdata,
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_data(f_in_data),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_data(f_out_data),
    .busy(f_busy));

  // Complex multiply-accumulate: four multipliers, four adders.
  cplx_t dv;
  logic signed [PW-1:0] m_rr, m_ii, m_ri, m_ir;
  cplx_t mac_next;
  logic  mac_last;

  assign bkb_row = r[RA-1:0];
  assign bkb_col = col;
  assign bkb_pt  = k[MA-1:0];
  assign dv      = dig[r[RA-1:0]][k[MA-1:0]];
  assign m_rr    = PW'(dv.re) * PW'(bkb_data.re);
  assign m_ii    = PW'(dv.im) * PW'(bkb_data.im);
  assign m_ri    = PW'(dv.re) * PW'(bkb_data.im);
  assign m_ir    = PW'(dv.im) * PW'(bkb_data.re);

  // remove the 2^DSHIFT digit scaling, rounding to nearest
  function automatic word_t unscale(input logic signed [PW-1:0] v);
    return word_t'((v + (PW'(1) <<< (DSHIFT - 1))) >>> DSHIFT);
  endfunction

  assign mac_next.re = ((r == '0) ? word_t'(0) : macc.re) + unscale(m_rr - m_ii);
  assign mac_next.im = ((r == '0) ? word_t'(0) : macc.im) + unscale(m_ri + m_ir);
  assign mac_last    = (32'(r) == ROWS - 1);

  assign f_in_valid  = (state == E_MAC) && mac_last;
  assign f_in_data   = mac_next;
  assign f_out_ready = (state == E_FDRAIN);

  assign busy = (state != E_IDLE);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state <= E_IDLE;
      round <= '0;
      k     <= '0;
      r     <= '0;
      col   <= 1'b0;
      macc  <= '0;
    end else begin
      unique case (state)
        E_IDLE: if (start) begin
          state <= E_IFEED;
          round <= '0;
          k     <= '0;
        end
        E_IFEED: if (all_in_ready) begin
          if (32'(k) == M - 1) begin
            k     <= '0;
            state <= E_ICOLLECT;
          end else k <= k + 1'b1;
        end
        E_ICOLLECT: if (all_out_valid) begin
          if (32'(k) == M - 1) begin
            k <= '0;
            if (32'(round) == ROUNDS - 1) begin
              state <= E_MAC;
              r     <= '0;
              col   <= 1'b0;
            end else begin
              round <= round + 1'b1;
              state <= E_IFEED;
            end
          end else k <= k + 1'b1;
        end
        E_MAC: begin
          if (!mac_last) begin
            macc <= mac_next;
            r    <= r + 1'b1;
          end else if (f_in_ready) begin
            r <= '0;
            if (32'(k) == M - 1) begin
              k     <= '0;
              state <= E_FDRAIN;
            end else k <= k + 1'b1;
          end
        end
        E_FDRAIN: if (f_out_valid) begin
          if (32'(k) == M - 1) begin
            k <= '0;
            if (col) state <= E_DONE;
            else begin
              col   <= 1'b1;
              state <= E_MAC;
            end
          end else k <= k + 1'b1;
        end
        E_DONE: begin
          done  <= 1'b1;
          state <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // storage writes
  always_ff @(posedge clk) begin
    if (state == E_ICOLLECT && all_out_valid)
      for (int u = 0; u < NIFFT; u++)
        if (i_act[u]) dig[32'(round) * NIFFT + u][k[MA-1:0]] <= i_out_data[u];
    if (state == E_FDRAIN && f_out_valid) begin
      if (!col) begin
        acc_a[k[MA-1:0]]             <= f_out_data.re[31:0];
        acc_a[M + 32'(k[MA-1:0])]    <= f_out_data.im[31:0];
      end else begin
        acc_b[k[MA-1:0]]             <= f_out_data.re[31:0];
        acc_b[M + 32'(k[MA-1:0])]    <= f_out_data.im[31:0];
      end
    end else if (acc_we && state == E_IDLE) begin
      acc_a[acc_waddr] <= acc_wdata_a;
      acc_b[acc_waddr] <= acc_wdata_b;
    end
  end

endmodule
