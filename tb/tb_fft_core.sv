// tb_fft_core: self-checking test of the coefficient <-> Lagrange transforms.
//
// A coefficient-to-Lagrange core (INVERSE=0) and a Lagrange-to-coefficient
// core (INVERSE=1) are loaded with lifting coefficients computed here in
// double precision.  Random 32-bit polynomials go through the forward core;
// every output is compared with a direct evaluation P(exp(i*pi*(4j+1)/N)),
// j = bitrev(q), in double precision.  The result then goes through the
// inverse core and must give back the input coefficients.  The number of
// compute cycles is checked against the depth-first schedule.
module tb_fft_core;
  import matcha_pkg::*;

  localparam int N = 64;
  localparam int P = 4;
  localparam int M = N / 2;
  localparam int L = $clog2(M);
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic  tw_we;
  logic [$clog2(N/2)-1:0] tw_waddr;
  twid_t tw_wdata;

  logic  f_in_valid, f_in_ready, f_out_valid, f_out_ready, f_busy;
  cplx_t f_in_data, f_out_data;
  logic  i_in_valid, i_in_ready, i_out_valid, i_out_ready, i_busy;
  cplx_t i_in_data, i_out_data;

  fft_core #(.N(N), .P(P), .INVERSE(1'b0)) dut_f (
    .clk, .rst_n, .tw_we, .tw_waddr, .tw_wdata,
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_data(f_in_data),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_data(f_out_data),
    .busy(f_busy));

  fft_core #(.N(N), .P(P), .INVERSE(1'b1)) dut_i (
    .clk, .rst_n, .tw_we, .tw_waddr, .tw_wdata,
    .in_valid(i_in_valid), .in_ready(i_in_ready), .in_data(i_in_data),
    .out_valid(i_out_valid), .out_ready(i_out_ready), .out_data(i_out_data),
    .busy(i_busy));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint r2l(input real r);
    return longint'(r);
  endfunction

  longint coef [N];
  cplx_t  lag  [M];
  int     t_last_in, t_first_out, cyc;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic int sched_steps(input bit inv);
    int s;
    s = (M + P - 1) / P;
    for (int l = 0; l < L; l++) s += (1 << l) * (((M >> (l + 1)) + P - 1) / P);
    return s;
  endfunction

  initial begin
    real th, er, ei, rr, ri;
    cyc = 0;
    tw_we = 0; tw_waddr = '0; tw_wdata = '0;
    f_in_valid = 0; f_in_data = '0; f_out_ready = 0;
    i_in_valid = 0; i_in_data = '0; i_out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N / 2; r++) begin
      th = PI * r / N;
      @(negedge clk);
      tw_we = 1; tw_waddr = r[$clog2(N/2)-1:0];
      tw_wdata.p = r2l($tan(th / 2) * 2.0**62);
      tw_wdata.s = r2l($sin(th) * 2.0**62);
    end
    @(negedge clk) tw_we = 0;

    for (int trial = 0; trial < 3; trial++) begin
      longint maxerr;
      for (int k = 0; k < N; k++) coef[k] = longint'(int'($urandom));
      // forward
      for (int k = 0; k < M; k++) begin
        @(negedge clk);
        f_in_valid = 1; f_in_data.re = coef[k]; f_in_data.im = coef[k + M];
        while (!f_in_ready) @(negedge clk);
      end
      @(posedge clk); t_last_in = cyc;
      @(negedge clk) f_in_valid = 0;
      f_out_ready = 1;
      for (int q = 0; q < M; q++) begin
        @(posedge clk);
        while (!f_out_valid) @(posedge clk);
        if (q == 0) t_first_out = cyc;
        lag[q] = f_out_data;
      end
      @(negedge clk) f_out_ready = 0;
      checks++;
      if (t_first_out - t_last_in != sched_steps(0) + 4) begin
        failures++;
        $display("forward latency %0d, schedule %0d", t_first_out - t_last_in, sched_steps(0) + 4);
      end
      // compare with direct evaluation
      maxerr = 0;
      for (int q = 0; q < M; q++) begin
        int j;
        j = int'(bitrev(q, L));
        rr = 0; ri = 0;
        for (int k = 0; k < N; k++) begin
          th = PI * real'((4 * j + 1) * k % (2 * N)) / N;
          rr += real'(coef[k]) * $cos(th);
          ri += real'(coef[k]) * $sin(th);
        end
        er = rr - real'(lag[q].re); ei = ri - real'(lag[q].im);
        if (er < 0) er = -er;
        if (ei < 0) ei = -ei;
        if (er > real'(maxerr)) maxerr = longint'(er);
        if (ei > real'(maxerr)) maxerr = longint'(ei);
        checks++;
        if (er > 256.0 || ei > 256.0) begin
          failures++;
          if (failures < 5) $display("q=%0d got %0d,%0d want %f,%f", q, lag[q].re, lag[q].im, rr, ri);
        end
      end
      $display("trial %0d forward max abs error %0d", trial, maxerr);
      // inverse
      for (int q = 0; q < M; q++) begin
        @(negedge clk);
        i_in_valid = 1; i_in_data = lag[q];
        while (!i_in_ready) @(negedge clk);
      end
      @(negedge clk) i_in_valid = 0;
      i_out_ready = 1;
      maxerr = 0;
      for (int k = 0; k < M; k++) begin
        longint dr, di;
        @(posedge clk);
        while (!i_out_valid) @(posedge clk);
        dr = i_out_data.re - coef[k]; di = i_out_data.im - coef[k + M];
        if (dr < 0) dr = -dr;
        if (di < 0) di = -di;
        if (dr > maxerr) maxerr = dr;
        if (di > maxerr) maxerr = di;
        checks++;
        if (dr > 8 || di > 8) begin
          failures++;
          if (failures < 5) $display("k=%0d got %0d,%0d want %0d,%0d", k, i_out_data.re, i_out_data.im, coef[k], coef[k+M]);
        end
      end
      @(negedge clk) i_out_ready = 0;
      $display("trial %0d round trip max abs error %0d", trial, maxerr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
