// tb_tgsw_cluster: self-checking test of the key-bundle construction.
//
// Loads the root table (computed here in double precision), streams random
// key-bundle values for all 2^MU-1 terms with random mask exponents, swaps
// the banks and reads the bundle back through the EP read port.  Each value
// is compared with h + sum_S BK_S * (zeta^(e_S*(4j+1)) - 1) evaluated in
// double precision.  It also checks the beat count (one per cycle) and that
// the bank being read is not disturbed by a second build.
module tb_tgsw_cluster;
  import matcha_pkg::*;

  localparam int N = 16, LEV = 3, BG_BITS = 10, MU = 3, NSCALE = 4;
  localparam int M = N / 2, ROWS = 2 * LEV, NPOLY = 2 * ROWS, TERMS = (1 << MU) - 1;
  localparam int NPASS = (TERMS + NSCALE - 1) / NSCALE;
  localparam int EW = $clog2(2 * N), MA = $clog2(M);
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rt_we; logic [EW-1:0] rt_waddr; root_t rt_wdata;
  logic start, busy, done, bk_valid, bk_ready, swap;
  logic [EW-1:0] abar [MU];
  cplx_t bk_data [NSCALE];
  logic [$clog2(ROWS)-1:0] bkb_row; logic bkb_col; logic [MA-1:0] bkb_pt;
  cplx_t bkb_data;

  tgsw_cluster #(.N(N), .LEV(LEV), .BG_BITS(BG_BITS), .MU(MU), .NSCALE(NSCALE)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint bkr [TERMS+1][NPOLY][M], bki [TERMS+1][NPOLY][M];
  real    expr_ [NPOLY][M], expi_ [NPOLY][M];
  int cyc, t0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic build(input bit record);
    int e [TERMS+1];
    for (int k = 0; k < MU; k++) abar[k] = EW'($urandom);
    for (int s = 1; s <= TERMS; s++) begin
      e[s] = 0;
      for (int k = 0; k < MU; k++) if (s[k]) e[s] -= int'(abar[k]);
      e[s] = ((e[s] % (2 * N)) + 2 * N) % (2 * N);
    end
    for (int pc = 0; pc < NPOLY; pc++) for (int q = 0; q < M; q++) for (int s = 1; s <= TERMS; s++) begin
      bkr[s][pc][q] = longint'($urandom) - 64'sh80000000;
      bki[s][pc][q] = longint'($urandom) - 64'sh80000000;
    end
    if (record)
      for (int pc = 0; pc < NPOLY; pc++) for (int q = 0; q < M; q++) begin
        int row, col, j;
        row = pc / 2; col = pc % 2; j = int'(bitrev(q, MA));
        expr_[pc][q] = (col == row / LEV) ? real'(longint'(1) << (32 - BG_BITS * (row % LEV + 1))) : 0.0;
        expi_[pc][q] = 0.0;
        for (int s = 1; s <= TERMS; s++) begin
          real th, c, sn;
          th = PI * real'((e[s] * (4 * j + 1)) % (2 * N)) / N;
          c = $cos(th) - 1.0; sn = $sin(th);
          expr_[pc][q] += real'(bkr[s][pc][q]) * c - real'(bki[s][pc][q]) * sn;
          expi_[pc][q] += real'(bkr[s][pc][q]) * sn + real'(bki[s][pc][q]) * c;
        end
      end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    t0 = cyc;
    for (int pc = 0; pc < NPOLY; pc++) for (int q = 0; q < M; q++) for (int p = 0; p < NPASS; p++) begin
      bk_valid = 1;
      for (int u = 0; u < NSCALE; u++) begin
        int s;
        s = p * NSCALE + u + 1;
        bk_data[u].re = (s <= TERMS) ? bkr[s][pc][q] : 64'sd12345;
        bk_data[u].im = (s <= TERMS) ? bki[s][pc][q] : 64'sd6789;
      end
      while (!bk_ready) @(negedge clk);
      @(negedge clk);
    end
    bk_valid = 0;
    while (busy) @(negedge clk);
    checks++;
    if (cyc - t0 != NPOLY * M * NPASS) begin
      failures++;
      $display("build took %0d cycles, expected %0d", cyc - t0, NPOLY * M * NPASS);
    end
  endtask

  task automatic compare();
    for (int pc = 0; pc < NPOLY; pc++) for (int q = 0; q < M; q++) begin
      real dr, di;
      bkb_row = ($clog2(ROWS))'(pc / 2); bkb_col = pc[0]; bkb_pt = MA'(q);
      #1;
      dr = real'(bkb_data.re) - expr_[pc][q]; di = real'(bkb_data.im) - expi_[pc][q];
      checks++;
      if (dr > 16.0 || dr < -16.0 || di > 16.0 || di < -16.0) begin
        failures++;
        if (failures < 5) $display("pc=%0d q=%0d got %0d,%0d want %f,%f", pc, q, bkb_data.re, bkb_data.im, expr_[pc][q], expi_[pc][q]);
      end
    end
  endtask

  initial begin
    cyc = 0;
    rt_we = 0; rt_waddr = '0; rt_wdata = '0; start = 0; bk_valid = 0; swap = 0;
    for (int u = 0; u < NSCALE; u++) bk_data[u] = '0;
    for (int k = 0; k < MU; k++) abar[k] = '0;
    bkb_row = '0; bkb_col = 0; bkb_pt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2 * N; t++) begin
      @(negedge clk);
      rt_we = 1; rt_waddr = EW'(t);
      rt_wdata.c = int'($cos(PI * t / N) * 2.0**30);
      rt_wdata.s = int'($sin(PI * t / N) * 2.0**30);
    end
    @(negedge clk) rt_we = 0;
    build(1);
    @(negedge clk) swap = 1;
    @(negedge clk) swap = 0;
    compare();
    // a second build writes the other bank; the read bank must be unchanged
    build(0);
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
