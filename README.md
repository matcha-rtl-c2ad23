# MATCHA bootstrapping datapath in SystemVerilog

TFHE evaluates Boolean gates on encrypted bits, and every gate ends with a
*bootstrapping* that resets the ciphertext noise. Almost all of the time goes
into the blind rotation: n sequential external products of a TGSW key with an
accumulator ACC, each one several polynomial products in the ring
Z[X]/(X^N+1). This RTL implements the datapath of the MATCHA accelerator. It
rests on two ideas:

1. **Approximate, multiplication-less integer FFTs.** Polynomial products go
   through the Lagrange (frequency) domain. The twiddle rotations are done by
   lifting steps with dyadic coefficients (x / 2^62), so they need only
   shifts and adds. The rounding errors are small, and TFHE's decryption
   rounds them away together with the ordinary noise.
2. **Aggressive bootstrapping-key unrolling (BKU), pipelined.** m key bits
   are handled per step. A *TGSW cluster* builds the key bundle
   `BKB = h + sum_S (X^{e_S} - 1) * BK_S` over the 2^m - 1 non-empty subsets S
   of the m bits, with `e_S = -sum_{k in S} abar_k`. An *External Product (EP)
   core* then computes `ACC <- BKB [x] ACC`. The two stages are pipelined:
   while the EP core uses BKB_t, the cluster builds BKB_(t+1).

Defaults: N = 1024, decomposition base Bg = 2^10 with l = 3 levels, m = 3,
8 pipelines and 128 butterfly cores per transform core.

## Data representation

* Torus values are 32-bit integers and wrap mod 2^32.
* A polynomial's Lagrange form has N/2 complex points with 64-bit signed
  parts (`matcha_pkg::cplx_t`). Point q holds the evaluation at the root
  `zeta^(4j+1)`, with `zeta = exp(i*pi/N)` and `j = bitrev(q)`. The forward
  transform (called IFFT, as in the TFHE library) leaves the points in
  bit-reversed order. The inverse (FFT) reads them in that order. So neither
  direction needs a bit-reversal pass.
* Coefficient k and coefficient k + N/2 are folded into one complex input
  point. A "twist" rotates point k by `zeta^k` before the forward transform.
  An "untwist" rotates by `zeta^-k` after the inverse. This gives the
  negacyclic (X^N + 1) product.
* A twiddle rotation by angle theta uses three lifting steps:
  `x -= [p*y]`, then `y += [s*x]`, then `x -= [p*y]`. Here `p = tan(theta/2)`,
  `s = sin(theta)` and `[.]` means rounding. Angles in [pi/2, 2*pi) first get
  exact quarter turns (swap and negate). So the twiddle buffer only holds
  N/2 entries, for angles `pi*r/N` with r < N/2.

## Blocks (rtl/)

| file | block |
|---|---|
| `matcha_pkg.sv` | types, `dyadic_mul` (shift-add product), `bitrev` |
| `lift_butterfly.sv` | butterfly core: DIF, DIT (each stage halves, so the inverse comes out scaled by 1/M) or rotate-only |
| `twiddle_buffer.sv` | twiddle factor buffer, one read port per butterfly core |
| `fft_agu.sv` | address generation: twist pass, then the radix-2 tree walked depth first (pre-order for DIF, post-order for DIT) |
| `sync_fifo.sv` | input/output FIFO (valid/ready) |
| `fft_core.sv` | FFT/IFFT core: two FIFOs, AGU, twiddle buffer, P butterflies on an in-place array of N/2 points |
| `tgsw_cluster.sv` | NSCALE scale units (complex multiply by `zeta^(e(4j+1)) - 1` using a loaded root table), an adder tree that also adds h, and two banks (write one, EP reads the other) |
| `ep_core.sv` | signed gadget decomposition, 4 IFFT cores, one complex MAC per cycle, 1 FFT core |
| `boot_pipe.sv` | cluster + EP core with the time-step sequencer |
| `matcha_top.sv` | NPIPE pipelines; twiddle and root tables are broadcast to all of them |

### Timing (N = 1024, P = 128)

* A transform takes N/2 load cycles, then 516 compute steps (4 twist steps
  plus 512 tree steps), then 4 cycles of latency, then N/2 drain cycles.
* An external product takes about 12,000 cycles:
  * two IFFT rounds for the 6 digit polynomials;
  * 2 x 6 x 512 MAC cycles;
  * two FFT passes.
* A cluster build takes 12 x 512 x ceil((2^m - 1)/4) cycles: 12,288 for
  m = 3.
* A run of n/m steps takes n/m + 1 time steps. Each time step lasts as long
  as the slower of the two stages.

### Numerical choices

* The digits enter the IFFT scaled by 2^24 (`DSHIFT`). The MAC then divides
  the 128-bit products by 2^24 again. Without this, the transform's rounding
  error of about ±5 units would be multiplied by 2^31-sized key values.
* For a single external product with random 32-bit keys, the error measured
  against exact arithmetic is below 2^11 out of 2^32 (at N = 64).
* Values stay below 2^63 for ordinary ciphertext statistics. This is not
  guaranteed for adversarial worst cases, in the same way that
  double-precision FFT has limits in TFHE software.

## Where this RTL departs from the published design

* **Radix.** The transforms are radix-2 with the depth-first traversal. The
  published design uses the radix-4 conjugate-pair FFT, which needs one twiddle
  read per butterfly.
* **Butterfly form.** Each butterfly computes its shift-add products fully
  unrolled in one cycle. The published core uses two adders and two shifters.
* **Multiplier widths.** The published multipliers are 32-bit. Here the TGSW
  scale multiplies are 64x33 bits and the EP multiply-accumulate is
  64x64 -> 128 bits.
* **Storage.** Each cluster bank holds a whole key bundle. The published
  figure is 16 KB. The EP core keeps its data in plain arrays, not in eight
  banks.
* **Missing blocks.** The polynomial unit, the 32-bank 4 MB scratchpad, the
  crossbars, the HBM2 memory controller and the PHY are not implemented. These
  are the parts that prepare ACC and the masks, stream the key bundles and
  finish the gate (sample extraction and key switching). `matcha_top` exposes
  their connections as ports.
* **Key-switching, gate constants, LWE dimension.** None of these are
  modelled. A run length of n/m steps is set through `niter`.
* **Worst-case ranges.** The 64-bit Lagrange values are only checked by
  simulation, not proven against overflow.

## Simulating

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=F`. Example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_matcha_top \
  -y rtl +libext+.sv rtl/matcha_pkg.sv tb/tb_matcha_top.sv && ./obj_dir/Vtb_matcha_top
```

* `tb_fft_core` (N = 64, P = 4): checks the forward transform against direct
  evaluation, checks the round trip, and checks the cycle count.
* `tb_ep_core` (N = 64): checks one external product against exact negacyclic
  arithmetic, with a tolerance of 2^14, and checks the cycle count.
* `tb_tgsw_cluster` (N = 16, m = 3): checks the bundle against double
  precision, and checks that the two banks are kept apart.
* `tb_matcha_top` (N = 16, 2 pipelines, m = 3, 3 steps): runs a blind rotation
  end to end and compares it with exact arithmetic. It also checks that the
  cluster and EP stages really overlapped and that multi-pass scaling
  happened.

The twiddle and root tables are computed by the testbenches from their
formulas. Both tables are written through load ports:

* twiddle buffer: `p = tan(pi*r/(2N))` and `s = sin(pi*r/N)`, times 2^62;
* root table: `cos(pi*t/N)` and `sin(pi*t/N)`, times 2^30.

No test runs at the full default size. At N = 1024, 8 pipelines and
128 butterflies the model elaborates and lints, but no testbench simulates it.
