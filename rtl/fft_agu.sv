// fft_agu: address generation unit of an FFT/IFFT core.
//
// Sequences one transform of M = N/2 complex points, in place, in a
// depth-first order: the radix-2 flow is a binary tree of sub-transforms
// (node size M, M/2, ..., 2) and each sub-transform is finished before the
// next one is started, so a small sub-block stays hot (the paper's Fig. 2b).
//   INVERSE = 0 (coefficient -> Lagrange, decimation in frequency):
//     a twist pass (point k rotated by exp(+i*pi*k/N)), then the tree in
//     pre-order (a node before its two halves), output in bit-reversed order.
//   INVERSE = 1 (Lagrange -> coefficient, decimation in time):
//     the tree in post-order (both halves before their node) on bit-reversed
//     input, then an untwist pass (exp(-i*pi*k/N)), natural-order output.
// Each step drives P butterfly lanes: a node of size S with S/2 butterflies
// takes ceil(S/2/P) steps.  Lane p of chunk c is butterfly j = c*P+p; it
// reads addresses idx*S+j and idx*S+j+S/2 and the twiddle at angle index
// t = j*2N/S on the 2N-point grid (angle pi*t/N).  One step per cycle while
// `advance` is high; `done` pulses with the last step.
// The depth-first traversal follows the paper; using a radix-2 tree (the
// paper cites a radix-4 conjugate-pair FFT) and the twist passes are this
// design's own choices.
module fft_agu
  import matcha_pkg::*;
#(
  parameter int N       = 1024,
  parameter int P       = 128,
  parameter bit INVERSE = 1'b0,
  localparam int M  = N / 2,
  localparam int L  = $clog2(M),       // tree levels
  localparam int AW = $clog2(M),
  localparam int TW = $clog2(2 * N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          advance,
  output logic          busy,
  output logic          done,
  output bf_mode_e      mode,
  output logic          lane_valid [P],
  output logic [AW-1:0] addr_a     [P],
  output logic [AW-1:0] addr_b     [P],
  output logic [TW-1:0] tw_idx     [P]
);

  localparam int RSTEPS = (M + P - 1) / P;  // steps of a twist pass

  typedef enum logic [1:0] {S_IDLE, S_TWIST, S_TREE, S_UNTWIST} state_e;
  state_e state;

  logic [$clog2(L+1)-1:0] lvl;
  logic [AW:0]            idx;
  logic [AW:0]            chunk;

  // Per-level constants.
  function automatic int unsigned half_of(input int unsigned l);
    return M >> (l + 1);
  endfunction
  function automatic int unsigned nchunks(input int unsigned l);
    int unsigned h;
    h = M >> (l + 1);
    return (h + P - 1) / P;
  endfunction

  // Lane outputs.
  always_comb begin
    mode = INVERSE ? BF_DIT : BF_DIF;
    if (state == S_TWIST || state == S_UNTWIST) mode = BF_ROT;
    for (int p = 0; p < P; p++) begin
      int unsigned j, h, base, k;
      j = 0; h = 0; base = 0; k = 0;
      lane_valid[p] = 1'b0;
      addr_a[p] = '0;
      addr_b[p] = '0;
      tw_idx[p] = '0;
      if (state == S_TWIST || state == S_UNTWIST) begin
        k = 32'(chunk) * P + p;
        lane_valid[p] = (k < M);
        addr_a[p] = AW'(k);
        addr_b[p] = AW'(k);
        tw_idx[p] = (state == S_TWIST) ? TW'(k) : TW'((2 * N - k) % (2 * N));
      end else if (state == S_TREE) begin
        h    = half_of(32'(lvl));
        j    = 32'(chunk) * P + p;
        base = 32'(idx) * 2 * h;
        lane_valid[p] = (j < h);
        addr_a[p] = AW'(base + j);
        addr_b[p] = AW'(base + j + h);
        tw_idx[p] = TW'(INVERSE ? ((2 * N - ((j * 2 * N) / (2 * h))) % (2 * N))
                                : ((j * 2 * N) / (2 * h)));
      end
    end
  end

  // Next node of the depth-first walk.
  logic                   last_chunk, tree_end;
  logic [$clog2(L+1)-1:0] nlvl;
  logic [AW:0]            nidx;

  always_comb begin
    last_chunk = (32'(chunk) + 1 >= nchunks(32'(lvl)));
    nlvl = lvl;
    nidx = idx;
    tree_end = 1'b0;
    if (!INVERSE) begin
      // pre-order: descend to the left half, else climb past right halves
      if (32'(lvl) < L - 1) begin
        nlvl = lvl + 1'b1;
        nidx = idx << 1;
      end else begin
        tree_end = (32'(idx) == (1 << lvl) - 1);
        for (int i = 0; i < L; i++)
          if (nidx[0] && nlvl != 0) begin
            nidx = nidx >> 1;
            nlvl = nlvl - 1'b1;
          end
        nidx = nidx + 1'b1;
      end
    end else begin
      // post-order: after a left half go to the leftmost leaf of its sibling,
      // after a right half go to the parent
      if (lvl == 0) begin
        tree_end = 1'b1;
      end else if (!idx[0]) begin
        nlvl = ($clog2(L+1))'(L - 1);
        nidx = (idx + 1'b1) << (L - 1 - 32'(lvl));
      end else begin
        nlvl = lvl - 1'b1;
        nidx = idx >> 1;
      end
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state <= S_IDLE;
      lvl   <= '0;
      idx   <= '0;
      chunk <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          chunk <= '0;
          idx   <= '0;
          if (!INVERSE) begin
            state <= S_TWIST;
            lvl   <= '0;
          end else begin
            state <= S_TREE;
            lvl   <= ($clog2(L+1))'(L - 1);
          end
        end
        S_TWIST: if (advance) begin
          if (32'(chunk) + 1 >= RSTEPS) begin
            chunk <= '0;
            state <= S_TREE;
          end else chunk <= chunk + 1'b1;
        end
        S_TREE: if (advance) begin
          if (!last_chunk) chunk <= chunk + 1'b1;
          else begin
            chunk <= '0;
            if (tree_end) begin
              if (INVERSE) state <= S_UNTWIST;
              else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end else begin
              lvl <= nlvl;
              idx <= nidx;
            end
          end
        end
        S_UNTWIST: if (advance) begin
          if (32'(chunk) + 1 >= RSTEPS) begin
            chunk <= '0;
            state <= S_IDLE;
            done  <= 1'b1;
          end else chunk <= chunk + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
