// lift_butterfly: one multiplication-less butterfly core of an FFT/IFFT core.
//
// The twiddle multiplication W*x is a rotation of the complex value x by an
// angle theta.  It is done as three lifting steps (Oraintara's integer FFT):
//   x1 = re - [p*im],  y1 = im + [s*x1],  x2 = x1 - [p*y1]
// with p = tan(theta_r/2), s = sin(theta_r) and [.] rounding to an integer.
// The coefficients are dyadic (x / 2^TW_FRAC), so each product is a sum of
// shifted copies of the operand (matcha_pkg::dyadic_mul): no multiplier.
// Angles are split as theta = quad*pi/2 + theta_r with theta_r in [0,pi/2);
// the quarter turns are exact swaps and negations.  Each lifting step is
// integer-to-integer and exactly invertible.
//
// Modes (matcha_pkg::bf_mode_e):
//   BF_DIF: ya = a + b,            yb = W*(a - b)         (coefficient -> Lagrange)
//   BF_DIT: ya = round((a+W*b)/2), yb = round((a-W*b)/2)  (Lagrange -> coefficient,
//           the 1/2 per stage gives the 1/M normalization of the inverse)
//   BF_ROT: ya = W*a,              yb = b                  (twist / untwist pass)
// Purely combinational; the FFT core registers the results.
// The lifting structure and dyadic coefficients follow the paper; the
// quarter-turn split, the per-stage halving and the fully unrolled shift-add
// (the paper's core has two adders and two shifters, used over several steps)
// are this design's own choices.
module lift_butterfly
  import matcha_pkg::*;
(
  input  bf_mode_e   mode,
  input  cplx_t      a,
  input  cplx_t      b,
  input  twid_t      tw,     // lifting coefficients of theta_r
  input  logic [1:0] quad,   // number of quarter turns added to theta_r
  output cplx_t      ya,
  output cplx_t      yb
);

  function automatic cplx_t rotate(input cplx_t x, input twid_t t, input logic [1:0] q);
    word_t x1, y1, x2;
    cplx_t r;
    x1 = x.re - dyadic_mul(x.im, t.p);
    y1 = x.im + dyadic_mul(x1, t.s);
    x2 = x1 - dyadic_mul(y1, t.p);
    unique case (q)
      2'd0: begin r.re =  x2; r.im =  y1; end
      2'd1: begin r.re = -y1; r.im =  x2; end
      2'd2: begin r.re = -x2; r.im = -y1; end
      default: begin r.re =  y1; r.im = -x2; end
    endcase
    return r;
  endfunction

  function automatic word_t half(input word_t v);
    return (v + word_t'(1)) >>> 1;
  endfunction

  cplx_t rin, rout;

  always_comb begin
    unique case (mode)
      BF_DIF: begin rin.re = a.re - b.re; rin.im = a.im - b.im; end
      BF_DIT: rin = b;
      default: rin = a;
    endcase
  end

  assign rout = rotate(rin, tw, quad);

  always_comb begin
    unique case (mode)
      BF_DIF: begin
        ya.re = a.re + b.re; ya.im = a.im + b.im;
        yb = rout;
      end
      BF_DIT: begin
        ya.re = half(a.re + rout.re); ya.im = half(a.im + rout.im);
        yb.re = half(a.re - rout.re); yb.im = half(a.im - rout.im);
      end
      default: begin
        ya = rout;
        yb = b;
      end
    endcase
  end

endmodule
