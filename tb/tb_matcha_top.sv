// tb_matcha_top: end-to-end test of blind rotation on the MATCHA datapath.
//
// Two pipelines run, at the same time, NITER unrolled blind-rotation steps
// each on their own random ACC, masks and key bundles (N=16, m=3 so each
// bundle has 7 terms and the cluster needs two passes).  The testbench keeps
// the key bundles in coefficient form, streams their Lagrange form (computed
// here in double precision) and computes the expected result exactly:
//   BKB_t = h + sum_S (X^(e_S) - 1) * BK_S,   ACC <- decomp(ACC) . BKB_t  (mod 2^32).
// The final ACC of each pipeline must match within a small approximation
// error.  It also checks that the build of BKB_(t+1) overlapped the external
// product with BKB_t (overlap_cycles > 0), that multi-pass scaling happened,
// and that a run takes NITER+1 time steps.
module tb_matcha_top;
  import matcha_pkg::*;

  localparam int NPIPE = 2, N = 16, P = 2, LEV = 3, BG_BITS = 10, MU = 3, NSCALE = 4, NIFFT = 4;
  localparam int M = N / 2, ROWS = 2 * LEV, NPOLY = 2 * ROWS, TERMS = (1 << MU) - 1;
  localparam int NPASS = (TERMS + NSCALE - 1) / NSCALE;
  localparam int EW = $clog2(2 * N), NA = $clog2(N), MA = $clog2(M);
  localparam int NITER = 3;
  localparam int TOL = 1 << 20;   // 2^-12 of the torus
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tw_we; logic [$clog2(N/2)-1:0] tw_waddr; twid_t tw_wdata;
  logic rt_we; logic [EW-1:0] rt_waddr; root_t rt_wdata;
  logic acc_we [NPIPE]; logic [NA-1:0] acc_waddr [NPIPE], acc_raddr [NPIPE];
  logic [31:0] acc_wdata_a [NPIPE], acc_wdata_b [NPIPE], acc_rdata_a [NPIPE], acc_rdata_b [NPIPE];
  logic start [NPIPE]; logic [15:0] niter [NPIPE];
  logic abar_valid [NPIPE], abar_ready [NPIPE]; logic [EW-1:0] abar [NPIPE][MU];
  logic bk_valid [NPIPE], bk_ready [NPIPE]; cplx_t bk_data [NPIPE][NSCALE];
  logic busy [NPIPE], done [NPIPE]; logic [31:0] overlap_cycles [NPIPE];

  matcha_top #(.NPIPE(NPIPE), .N(N), .P(P), .LEV(LEV), .BG_BITS(BG_BITS), .MU(MU),
               .NSCALE(NSCALE), .NIFFT(NIFFT)) dut (.*);

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] acc [NPIPE][2][N];
  logic [31:0] bk  [NPIPE][NITER][TERMS+1][NPOLY][N];
  int          ab  [NPIPE][NITER][MU];
  int          beats [NPIPE];

  function automatic int digit(input logic [31:0] v, input int lvl);
    logic [31:0] off, b;
    off = 32'd1 << (32 - LEV * BG_BITS - 1);
    for (int p = 1; p <= LEV; p++) off += 32'(512) << (32 - p * BG_BITS);
    b = v + off;
    return int'((b >> (32 - (lvl + 1) * BG_BITS)) & 32'h3ff) - 512;
  endfunction

  // reference: one unrolled step on pipeline g
  task automatic ref_step(input int g, input int t);
    logic [31:0] bkb [NPOLY][N];
    logic [31:0] nacc [2][N];
    for (int pc = 0; pc < NPOLY; pc++) for (int i = 0; i < N; i++) begin
      int row, col;
      row = pc / 2; col = pc % 2;
      bkb[pc][i] = (i == 0 && col == row / LEV) ? (32'd1 << (32 - BG_BITS * (row % LEV + 1))) : 32'd0;
    end
    for (int s = 1; s <= TERMS; s++) begin
      int e;
      e = 0;
      for (int k = 0; k < MU; k++) if (s[k]) e -= ab[g][t][k];
      e = ((e % (2 * N)) + 2 * N) % (2 * N);
      for (int pc = 0; pc < NPOLY; pc++) for (int i = 0; i < N; i++) begin
        int d;
        logic [31:0] v;
        d = (i + e) % (2 * N);
        v = bk[g][t][s][pc][i];
        if (d < N) bkb[pc][d] += v; else bkb[pc][d - N] -= v;
        bkb[pc][i] -= v;
      end
    end
    for (int c = 0; c < 2; c++) for (int k = 0; k < N; k++) begin
      logic [31:0] sum;
      sum = '0;
      for (int r = 0; r < ROWS; r++) for (int i = 0; i < N; i++) begin
        int d;
        d = digit(acc[g][r / LEV][i], r % LEV);
        if (k - i >= 0) sum += 32'(d) * bkb[r * 2 + c][k - i];
        else sum -= 32'(d) * bkb[r * 2 + c][k - i + N];
      end
      nacc[c][k] = sum;
    end
    acc[g] = nacc;
  endtask

  task automatic lagrange(input int g, input int t, input int s, input int pc, input int q, output cplx_t v);
    real rr, ri, th;
    int j;
    j = int'(bitrev(q, MA));
    rr = 0; ri = 0;
    for (int k = 0; k < N; k++) begin
      th = PI * real'((4 * j + 1) * k % (2 * N)) / N;
      rr += real'(int'(bk[g][t][s][pc][k])) * $cos(th);
      ri += real'(int'(bk[g][t][s][pc][k])) * $sin(th);
    end
    v.re = longint'(rr); v.im = longint'(ri);
  endtask

  task automatic run_pipe(input int g);
    int t0, t1;
    beats[g] = 0;
    @(negedge clk) start[g] = 1; niter[g] = 16'(NITER);
    @(negedge clk) start[g] = 0;
    for (int t = 0; t < NITER; t++) begin
      for (int k = 0; k < MU; k++) abar[g][k] = EW'(ab[g][t][k]);
      abar_valid[g] = 1;
      do @(posedge clk); while (!abar_ready[g]);
      @(negedge clk) abar_valid[g] = 0;
      for (int pc = 0; pc < NPOLY; pc++) for (int q = 0; q < M; q++) for (int p = 0; p < NPASS; p++) begin
        for (int u = 0; u < NSCALE; u++) begin
          int s;
          s = p * NSCALE + u + 1;
          if (s <= TERMS) lagrange(g, t, s, pc, q, bk_data[g][u]);
          else bk_data[g][u] = '0;
        end
        bk_valid[g] = 1;
        do @(posedge clk); while (!bk_ready[g]);
        @(negedge clk);
        beats[g]++;
      end
      bk_valid[g] = 0;
    end
    while (!done[g]) @(negedge clk);
  endtask

  initial begin
    real th;
    tw_we = 0; tw_waddr = '0; tw_wdata = '0; rt_we = 0; rt_waddr = '0; rt_wdata = '0;
    for (int g = 0; g < NPIPE; g++) begin
      acc_we[g] = 0; acc_waddr[g] = '0; acc_raddr[g] = '0; acc_wdata_a[g] = '0; acc_wdata_b[g] = '0;
      start[g] = 0; niter[g] = '0; abar_valid[g] = 0; bk_valid[g] = 0;
      for (int k = 0; k < MU; k++) abar[g][k] = '0;
      for (int u = 0; u < NSCALE; u++) bk_data[g][u] = '0;
    end
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
    for (int t = 0; t < 2 * N; t++) begin
      @(negedge clk);
      rt_we = 1; rt_waddr = EW'(t);
      rt_wdata.c = int'($cos(PI * t / N) * 2.0**30);
      rt_wdata.s = int'($sin(PI * t / N) * 2.0**30);
    end
    @(negedge clk) rt_we = 0;
    // random problem; key bundles small enough that the noise stays tame
    for (int g = 0; g < NPIPE; g++) begin
      for (int c = 0; c < 2; c++) for (int k = 0; k < N; k++) acc[g][c][k] = $urandom;
      for (int t = 0; t < NITER; t++) begin
        for (int k = 0; k < MU; k++) ab[g][t][k] = int'($urandom % (2 * N));
        for (int s = 1; s <= TERMS; s++) for (int pc = 0; pc < NPOLY; pc++) for (int k = 0; k < N; k++)
          bk[g][t][s][pc][k] = 32'($urandom % 17) - 32'd8;  // TGSW-like: h plus small terms
      end
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        acc_we[g] = 1; acc_waddr[g] = NA'(k); acc_wdata_a[g] = acc[g][0][k]; acc_wdata_b[g] = acc[g][1][k];
      end
      @(negedge clk) acc_we[g] = 0;
    end
    for (int g = 0; g < NPIPE; g++) for (int t = 0; t < NITER; t++) ref_step(g, t);
    fork
      run_pipe(0);
      run_pipe(1);
    join
    for (int g = 0; g < NPIPE; g++) begin
      int maxerr;
      maxerr = 0;
      for (int k = 0; k < N; k++) begin
        int ea, eb;
        @(negedge clk) acc_raddr[g] = NA'(k);
        #1;
        ea = int'(acc_rdata_a[g] - acc[g][0][k]); eb = int'(acc_rdata_b[g] - acc[g][1][k]);
        if (ea < 0) ea = -ea;
        if (eb < 0) eb = -eb;
        if (ea > maxerr) maxerr = ea;
        if (eb > maxerr) maxerr = eb;
        checks += 2;
        if (ea > TOL) failures++;
        if (eb > TOL) failures++;
      end
      $display("pipeline %0d: max |error| %0d of 2^32, overlap cycles %0d, key beats %0d",
               g, maxerr, overlap_cycles[g], beats[g]);
      // mechanisms: stage overlap and multi-pass term scaling
      checks++;
      if (overlap_cycles[g] == 0) begin failures++; $display("no pipeline overlap"); end
      checks++;
      if (beats[g] != NITER * NPOLY * M * NPASS || NPASS < 2) begin failures++; $display("no multi-pass scaling"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
