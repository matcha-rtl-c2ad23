// tb_ep_core: self-checking test of one external product ACC <- BKB [x] ACC.
//
// A random ACC (two torus polynomials) and a random BKB (2*LEV x 2 torus
// polynomials) are drawn.  The testbench converts the BKB to the Lagrange
// domain itself in double precision and serves it on the core's BKB read
// port.  The expected result is computed exactly in the coefficient domain:
// TFHE decomposition of ACC, then negacyclic products summed mod 2^32.  The
// core's result must agree to within a small approximation error (the
// transforms are approximate; TFHE absorbs such errors into its noise).
// The start-to-done cycle count is checked against the schedule.
module tb_ep_core;
  import matcha_pkg::*;

  localparam int N = 64, P = 4, LEV = 3, BG_BITS = 10, NIFFT = 4;
  localparam int M = N / 2, ROWS = 2 * LEV, L = $clog2(M);
  localparam real PI = 3.14159265358979323846;
  localparam int TOL = 16384;  // 2^-18 of the torus

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tw_we; logic [$clog2(N/2)-1:0] tw_waddr; twid_t tw_wdata;
  logic acc_we; logic [$clog2(N)-1:0] acc_waddr, acc_raddr;
  logic [31:0] acc_wdata_a, acc_wdata_b, acc_rdata_a, acc_rdata_b;
  logic [$clog2(ROWS)-1:0] bkb_row; logic bkb_col; logic [$clog2(M)-1:0] bkb_pt;
  cplx_t bkb_data;
  logic start, busy, done;

  ep_core #(.N(N), .P(P), .LEV(LEV), .BG_BITS(BG_BITS), .NIFFT(NIFFT)) dut (.*);

  cplx_t  bkb_lag [ROWS][2][M];
  logic [31:0] bkb_c [ROWS][2][N];
  logic [31:0] a_in [N], b_in [N], expect_a [N], expect_b [N];

  assign bkb_data = bkb_lag[bkb_row][bkb_col][bkb_pt];

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int digit(input logic [31:0] v, input int lvl);
    logic [31:0] off, b;
    off = 32'd1 << (32 - LEV * BG_BITS - 1);
    for (int p = 1; p <= LEV; p++) off += 32'(512) << (32 - p * BG_BITS);
    b = v + off;
    return int'((b >> (32 - (lvl + 1) * BG_BITS)) & 32'h3ff) - 512;
  endfunction

  function automatic int sched();
    int ifft_steps, s;
    ifft_steps = (M + P - 1) / P;
    for (int l = 0; l < L; l++) ifft_steps += (1 << l) * (((M >> (l + 1)) + P - 1) / P);
    // per IFFT round: M loads, steps + 4 latency, M - 1 further drains
    s = ((ROWS + NIFFT - 1) / NIFFT) * (M + ifft_steps + 4 + M - 1);
    // per column: ROWS*M MAC cycles, steps + 4 latency, M drains
    s += 2 * (ROWS * M + ifft_steps + 4 + M);
    return s;
  endfunction

  int cyc, t0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    real th, rr, ri;
    cyc = 0;
    tw_we = 0; tw_waddr = '0; tw_wdata = '0; acc_we = 0; acc_waddr = '0;
    acc_wdata_a = '0; acc_wdata_b = '0; acc_raddr = '0; start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N / 2; r++) begin
      th = PI * r / N;
      @(negedge clk);
      tw_we = 1; tw_waddr = r[$clog2(N/2)-1:0];
      tw_wdata.p = longint'($tan(th / 2) * 2.0**62);
      tw_wdata.s = longint'($sin(th) * 2.0**62);
    end
    @(negedge clk) tw_we = 0;

    for (int trial = 0; trial < 2; trial++) begin
      int maxerr;
      for (int k = 0; k < N; k++) begin a_in[k] = $urandom; b_in[k] = $urandom; end
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < 2; c++) for (int k = 0; k < N; k++)
        bkb_c[r][c][k] = $urandom;
      // Lagrange form of the BKB (centered torus values)
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < 2; c++) for (int q = 0; q < M; q++) begin
        int j;
        j = int'(bitrev(q, L));
        rr = 0; ri = 0;
        for (int k = 0; k < N; k++) begin
          th = PI * real'((4 * j + 1) * k % (2 * N)) / N;
          rr += real'(int'(bkb_c[r][c][k])) * $cos(th);
          ri += real'(int'(bkb_c[r][c][k])) * $sin(th);
        end
        bkb_lag[r][c][q].re = longint'(rr);
        bkb_lag[r][c][q].im = longint'(ri);
      end
      // exact reference
      for (int c = 0; c < 2; c++) for (int k = 0; k < N; k++) begin
        logic [31:0] s;
        s = '0;
        for (int r = 0; r < ROWS; r++)
          for (int i = 0; i < N; i++) begin
            int d, idx;
            logic [31:0] t;
            d = digit((r < LEV) ? a_in[i] : b_in[i], r % LEV);
            idx = k - i;
            if (idx >= 0) t = bkb_c[r][c][idx];
            else t = -bkb_c[r][c][idx + N];
            s += 32'(d) * t;
          end
        if (c == 0) expect_a[k] = s; else expect_b[k] = s;
      end
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        acc_we = 1; acc_waddr = k[$clog2(N)-1:0]; acc_wdata_a = a_in[k]; acc_wdata_b = b_in[k];
      end
      @(negedge clk) acc_we = 0; start = 1;
      @(posedge clk) t0 = cyc;
      @(negedge clk) start = 0;
      while (!done) @(posedge clk);
      checks++;
      if (cyc - t0 != sched()) begin
        failures++;
        $display("EP cycles %0d, schedule %0d", cyc - t0, sched());
      end
      maxerr = 0;
      for (int k = 0; k < N; k++) begin
        int ea, eb;
        @(negedge clk) acc_raddr = k[$clog2(N)-1:0];
        #1;
        ea = int'(acc_rdata_a - expect_a[k]); eb = int'(acc_rdata_b - expect_b[k]);
        if (ea < 0) ea = -ea;
        if (eb < 0) eb = -eb;
        if (ea > maxerr) maxerr = ea;
        if (eb > maxerr) maxerr = eb;
        checks += 2;
        if (ea > TOL) failures++;
        if (eb > TOL) failures++;
      end
      $display("trial %0d: EP took %0d cycles, max |error| %0d (of 2^32)", trial, cyc - t0, maxerr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
