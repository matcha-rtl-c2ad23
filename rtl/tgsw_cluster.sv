// tgsw_cluster: builds the bootstrapping key bundle of one unrolled step.
//
// With key unrolling by m = MU, one blind-rotation step multiplies ACC by
//   X^(-sum_k abar_k*s_k) = 1 + sum_S (X^(e_S) - 1) * [prod_{k in S} s_k prod_{k not in S} (1-s_k)]
// over the 2^MU - 1 non-empty subsets S of the MU key bits, e_S = -sum_{k in S} abar_k.
// The cluster therefore forms
//   BKB = h + sum_S (X^(e_S) - 1) * BK_S
// where BK_S are the TGSW key-bundle ciphertexts and h is the gadget matrix
// (row r = col*LEV + lvl holds 2^(32-BG_BITS*(lvl+1)) in column col).
// Everything is in the Lagrange domain, where multiplying by X^e - 1 is a
// pointwise product with zeta^(e*(4j+1)) - 1, zeta = exp(i*pi/N), j the root
// index of point q (j = bitrev(q)).  The roots come from a table of 2N
// entries (cos, sin in Q1.30) loaded through rt_we.
//
// Datapath: NSCALE TGSW scale units (each one complex multiply = four
// multipliers) take the values of NSCALE terms for the same (row, col,
// point); an adder tree sums them with the partial sum of the point (or with
// h in the first pass) and writes the result into the write bank.  Terms are
// processed in ceil((2^MU-1)/NSCALE) passes.  Input order of bk_data:
// poly pc = 0 .. 2*ROWS-1 (row = pc/2, col = pc%2), point q = 0 .. N/2-1, pass.
// Term of lane u in pass p is subset S = p*NSCALE + u + 1 (bit k = key k).
// One bk beat per cycle (valid/ready).  `done` pulses after the last beat.
//
// Two register banks: the cluster writes one while the EP core reads the
// other through bkb_row/col/pt; `swap` exchanges them.  This is what lets the
// cluster build BKB(i+1) while the EP core uses BKB(i).
// The BKB formula, the scale units, the adder tree and the two banks follow
// the paper; the Lagrange-domain scaling, NSCALE = 16 multipliers / 4, the
// root table and the bank size (a whole BKB, where the paper gives 16 KB)
// are this design's own choices.
module tgsw_cluster
  import matcha_pkg::*;
#(
  parameter int N       = 1024,
  parameter int LEV     = 3,
  parameter int BG_BITS = 10,
  parameter int MU      = 3,        // unrolling factor m
  parameter int NSCALE  = 4,
  localparam int M     = N / 2,
  localparam int ROWS  = 2 * LEV,
  localparam int NPOLY = 2 * ROWS,
  localparam int TERMS = (1 << MU) - 1,
  localparam int NPASS = (TERMS + NSCALE - 1) / NSCALE,
  localparam int EW    = $clog2(2 * N),
  localparam int MA    = $clog2(M),
  localparam int RA    = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // root-of-unity table
  input  logic          rt_we,
  input  logic [EW-1:0] rt_waddr,
  input  root_t         rt_wdata,
  // build control
  input  logic          start,
  input  logic [EW-1:0] abar [MU],   // rounded mask coefficients, mod 2N
  output logic          busy,
  output logic          done,
  // key-bundle input stream
  input  logic          bk_valid,
  output logic          bk_ready,
  input  cplx_t         bk_data [NSCALE],
  // bank control and EP read port
  input  logic          swap,
  input  logic [RA-1:0] bkb_row,
  input  logic          bkb_col,
  input  logic [MA-1:0] bkb_pt,
  output cplx_t         bkb_data
);

  root_t rtab [2 * N];
  cplx_t bank [2][NPOLY][M];
  logic  wsel;

  always_ff @(posedge clk)
    if (rt_we) rtab[rt_waddr] <= rt_wdata;

  assign bkb_data = bank[~wsel][{bkb_row, bkb_col}][bkb_pt];

  // exponents of the terms
  logic [EW-1:0] e_term [TERMS+1];
  logic [EW-1:0] abar_q [MU];

  always_comb begin
    for (int s = 0; s <= TERMS; s++) begin
      e_term[s] = '0;
      for (int k = 0; k < MU; k++)
        if (s[k]) e_term[s] = e_term[s] - abar_q[k];
    end
  end

  // position in the stream
  logic [$clog2(NPOLY+1)-1:0] pc;
  logic [MA:0]                q;
  logic [$clog2(NPASS+1)-1:0] pass;
  logic                       running;

  assign bk_ready = running;
  assign busy     = running;

  // scale units
  cplx_t scaled [NSCALE];
  logic [EW-1:0] jexp;

  assign jexp = EW'(4 * bitrev(32'(q[MA-1:0]), MA) + 1);

  function automatic word_t rmul(input word_t x, input logic signed [32:0] f);
    logic signed [CW+33:0] pr;
    pr = (CW+34)'(x) * (CW+34)'(f);
    return word_t'((pr + ((CW+34)'(1) <<< (ROOT_FRAC - 1))) >>> ROOT_FRAC);
  endfunction

  for (genvar u = 0; u < NSCALE; u++) begin : g_scale
    always_comb begin
      int term;
      logic [EW-1:0] idx;
      root_t rt;
      logic signed [32:0] cm1, sn;
      term = 32'(pass) * NSCALE + u + 1;
      idx = (term <= TERMS) ? EW'(e_term[term] * jexp) : '0;
      rt  = rtab[idx];
      cm1 = 33'(rt.c) - (33'sd1 <<< ROOT_FRAC);
      sn  = 33'(rt.s);
      if (term <= TERMS) begin
        scaled[u].re = rmul(bk_data[u].re, cm1) - rmul(bk_data[u].im, sn);
        scaled[u].im = rmul(bk_data[u].re, sn)  + rmul(bk_data[u].im, cm1);
      end else begin
        scaled[u] = '0;
      end
    end
  end

  // adder tree with the partial sum (or h)
  cplx_t tree_sum;
  always_comb begin
    int row, lvl, col;
    row = 32'(pc) >> 1;
    col = 32'(pc) & 1;
    lvl = row % LEV;
    if (pass == '0) begin
      tree_sum.re = (col == row / LEV) ? (word_t'(1) <<< (32 - BG_BITS * (lvl + 1))) : word_t'(0);
      tree_sum.im = '0;
    end else begin
      tree_sum = bank[wsel][pc[$clog2(NPOLY)-1:0]][q[MA-1:0]];
    end
    for (int u = 0; u < NSCALE; u++) begin
      tree_sum.re = tree_sum.re + scaled[u].re;
      tree_sum.im = tree_sum.im + scaled[u].im;
    end
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      running <= 1'b0;
      wsel    <= 1'b0;
      pc      <= '0;
      q       <= '0;
      pass    <= '0;
      for (int k = 0; k < MU; k++) abar_q[k] <= '0;
    end else begin
      if (swap) wsel <= ~wsel;
      if (start && !running) begin
        running <= 1'b1;
        pc <= '0; q <= '0; pass <= '0;
        abar_q <= abar;
      end else if (running && bk_valid) begin
        bank[wsel][pc[$clog2(NPOLY)-1:0]][q[MA-1:0]] <= tree_sum;
        if (32'(pass) == NPASS - 1) begin
          pass <= '0;
          if (32'(q) == M - 1) begin
            q <= '0;
            if (32'(pc) == NPOLY - 1) begin
              running <= 1'b0;
              done    <= 1'b1;
            end else pc <= pc + 1'b1;
          end else q <= q + 1'b1;
        end else pass <= pass + 1'b1;
      end
    end
  end

  a_no_swap_while_building: assert property (@(posedge clk) disable iff (!rst_n) !(swap && running));

endmodule
