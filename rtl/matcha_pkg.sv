// matcha_pkg: types and constants shared by the MATCHA datapath.
//
// Torus elements are 32-bit integers (the torus scaled by 2^32, arithmetic
// wraps mod 2^32).  Lagrange-domain values are complex numbers with 64-bit
// signed integer parts.  Twiddle factors are stored as dyadic lifting
// coefficients with TW_FRAC fractional bits (a 64-bit dyadic quantization).
// The TFHE parameters N=1024, k=1, Bg=1024, l=3 are those the design is
// evaluated with; the remaining constants are this design's own choices.
package matcha_pkg;

  localparam int TORUS_W = 32;   // torus word
  localparam int CW      = 64;   // real/imag part of a Lagrange value
  localparam int TW_FRAC = 62;   // fractional bits of a lifting coefficient
  localparam int ROOT_FRAC = 30; // fractional bits of a root of unity (TGSW scale)

  typedef logic signed [CW-1:0] word_t;

  typedef struct packed {
    logic signed [CW-1:0] re;
    logic signed [CW-1:0] im;
  } cplx_t;

  // One entry of the twiddle factor buffer: the rotation by angle theta is
  // done by three lifting steps with coefficients -p, s, -p where
  // p = tan(theta/2) and s = sin(theta), both as x / 2^TW_FRAC.
  typedef struct packed {
    logic signed [CW-1:0] p;
    logic signed [CW-1:0] s;
  } twid_t;

  // A root of unity exp(i*pi*t/N) in Q1.ROOT_FRAC (TGSW scale units).
  typedef struct packed {
    logic signed [31:0] c;
    logic signed [31:0] s;
  } root_t;

  typedef enum logic [1:0] {
    BF_DIF = 2'd0,  // (a,b) -> (a+b, (a-b)*W)
    BF_DIT = 2'd1,  // (a,b) -> ((a+W*b)/2, (a-W*b)/2)
    BF_ROT = 2'd2   // (a,b) -> (a*W, b*W) (twist / untwist pass)
  } bf_mode_e;

  // Polynomial-unit operations.
  typedef enum logic [3:0] {
    PU_ADD      = 4'd0,  // y = x0 + x1
    PU_SUB      = 4'd1,  // y = x0 - x1
    PU_NEG      = 4'd2,  // y = -x0
    PU_GATE     = 4'd3,  // y = sgn*(x0 + x1)*mul + const (TFHE gate linear part)
    PU_MODSW    = 4'd4,  // y = round(2N * x0)           (Algorithm 1 line 2)
    PU_TESTV    = 4'd5,  // y = +-mu' by position       (Algorithm 1 lines 3-4)
    PU_EXTRACT  = 4'd6,  // y = -x0 (k>0) / x0 (k=0)    (SampleExtract of a)
    PU_KSDIGIT  = 4'd7,  // y = digit j of x0            (key-switch decomposition)
    PU_CMP      = 4'd8,  // y = (x0 < x1) signed compare
    PU_XOR      = 4'd9,  // y = x0 ^ x1
    PU_AND      = 4'd10, // y = x0 & x1
    PU_OR       = 4'd11  // y = x0 | x1
  } pu_op_e;

  typedef enum logic [2:0] {
    G_NAND = 3'd0, G_AND = 3'd1, G_OR = 3'd2, G_XOR = 3'd3, G_XNOR = 3'd4, G_NOR = 3'd5
  } gate_e;

  // round(x * c / 2^TW_FRAC) computed with shifts and adds only: every set
  // bit of the dyadic coefficient contributes one shifted copy of x.
  function automatic word_t dyadic_mul(input word_t x, input word_t c);
    logic signed [2*CW-1:0] acc;
    logic signed [2*CW-1:0] xe;
    logic        [CW-1:0]   mag;
    acc = '0;
    xe  = {{CW{x[CW-1]}}, x};
    mag = c[CW-1] ? -c : c;
    for (int b = 0; b < CW; b++)
      if (mag[b]) acc = acc + (xe <<< b);
    if (c[CW-1]) acc = -acc;
    acc = acc + ({{(2*CW-1){1'b0}}, 1'b1} <<< (TW_FRAC-1));
    return word_t'(acc >>> TW_FRAC);
  endfunction

  function automatic int unsigned bitrev(input int unsigned v, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int i = 0; i < 32; i++)
      if (i < bits) r = (r << 1) | ((v >> i) & 1);
    return r;
  endfunction

endpackage
