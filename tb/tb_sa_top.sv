// tb_sa_top: end-to-end test of the spatial array at its default size (8x8,
// 4 weight-buffer entries, 4096-word banks).
//
// For each kernel mapping the bench loads random operands into the banks
// through the host port, runs the kernel, reads every result back and compares
// it with a reference computed here in plain integer arithmetic:
//   1 real matrix product        X(32x16) * W(16x16)   (2 K tiles x 2 M tiles)
//   2 complex matrix-vector      X(32x8)  * w(8x1)
//   3 real FIR, 32 taps on 4 columns, 48 outputs
//   4 complex matched filter, 16 conjugated taps on 2 columns, 40 outputs
//   5 complex outer-product sum  x(24x16)^T * conj(y(24x8))
//   6 complex magnitude squared  |a|^2 over 64 elements (element-wise mode)
//   7 real element-wise product  a .* b over 32 elements
// It also checks each kernel's cycle count against the streaming rate the
// mapping should reach (one real or one quarter complex multiply per PE per
// cycle, one element pair per column per cycle), and counts how often each
// mechanism happened: use of several weight tiles, accumulation across K
// tiles in the accumulator row, the horizontal accumulator chain, the input
// delay buffer, the result path deferring a PE's result, and each mode.
module tb_sa_top;
  import sa_pkg::*;

  localparam int ROWS = 8;
  localparam int COLS = 8;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              start = 1'b0;
  desc_t             desc = '0;
  logic              busy, done;
  logic [31:0]       cycles;
  logic              host_we = 1'b0, host_re = 1'b0, host_col = 1'b0;
  logic [3:0]        host_bank = '0;
  logic [ADDR_W-1:0] host_addr = '0;
  cword_t            host_wdata = '0;
  cword_t            host_rdata;

  int checks = 0;
  int failures = 0;

  sa_top dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------- watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ mechanism counters
  int n_tiles_used = 0, n_kacc = 0, n_chain = 0, n_delay = 0;
  int n_ws = 0, n_os = 0, n_ew = 0, n_cplx = 0;
  int defer [ROWS*COLS];

  always @(posedge clk) begin
    for (int c = 0; c < COLS; c++)
      if (dut.res_bot[c].valid && !dut.res_bot[c].last) n_kacc++;
    if (dut.u_acc.fin.valid && dut.cfg.red_cols != 0) n_chain++;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      initial defer[r*COLS+c] = 0;
      always @(posedge clk)
        if (dut.u_array.g_row[r].g_col[c].u_pe.hold_v &&
            dut.u_array.g_row[r].g_col[c].u_pe.res_in.valid)
          defer[r*COLS+c]++;
    end
  end

  // ------------------------------------------------------------ host access
  task automatic wr_bank(input bit col, input int bank, input int addr, input int re, input int im);
    @(negedge clk);
    host_we    = 1'b1;
    host_col   = col;
    host_bank  = 4'(bank);
    host_addr  = ADDR_W'(addr);
    host_wdata.re = re;
    host_wdata.im = im;
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic rd_col(input int bank, input int addr, output int re, output int im);
    @(negedge clk);
    host_re   = 1'b1;
    host_col  = 1'b1;
    host_bank = 4'(bank);
    host_addr = ADDR_W'(addr);
    @(negedge clk);
    host_re = 1'b0;
    re = host_rdata.re;
    im = host_rdata.im;
  endtask

  task automatic run(input desc_t dd, output int cyc);
    @(negedge clk);
    desc  = dd;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    cyc = int'(cycles);
    if (dd.mode == MODE_WS) n_ws++;
    if (dd.mode == MODE_OS) n_os++;
    if (dd.mode == MODE_EW) n_ew++;
    if (dd.cplx) n_cplx++;
    if (dd.fir) n_delay++;
    if (dd.mode == MODE_WS && !dd.fir && dd.kt * dd.mt > 1) n_tiles_used++;
  endtask

  task automatic check(input string what, input int got_re, input int got_im,
                       input int exp_re, input int exp_im);
    checks++;
    if (got_re !== exp_re || got_im !== exp_im) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: got (%0d,%0d) expected (%0d,%0d)", what, got_re, got_im, exp_re, exp_im);
    end
  endtask

  task automatic check_cycles(input string what, input int got, input int lo, input int hi);
    checks++;
    $display("%s: %0d cycles (expected %0d..%0d)", what, got, lo, hi);
    if (got < lo || got > hi) begin
      failures++;
      $display("FAIL %s cycle count", what);
    end
  endtask

  function automatic int rnd(int span);
    return int'($urandom_range(2 * span)) - span;
  endfunction

  // ------------------------------------------------------------------ tests
  // real and complex weight-stationary matrix product
  task automatic test_ws(input bit cplx, input int n, input int kt, input int mt);
    int xr[][], xi[][], wr_[][], wi[][];
    int k = 8 * kt, m = 8 * mt;
    int er, ei, gr, gi, cyc, p;
    desc_t dd;
    xr = new[n]; xi = new[n];
    foreach (xr[i]) begin xr[i] = new[k]; xi[i] = new[k]; end
    wr_ = new[k]; wi = new[k];
    foreach (wr_[i]) begin wr_[i] = new[m]; wi[i] = new[m]; end
    for (int i = 0; i < n; i++)
      for (int j = 0; j < k; j++) begin
        xr[i][j] = rnd(200); xi[i][j] = cplx ? rnd(200) : 0;
        wr_bank(0, j % 8, 100 + i * kt + j / 8, xr[i][j], xi[i][j]);
      end
    for (int j = 0; j < k; j++)
      for (int q = 0; q < m; q++) begin
        // complex test: only column 0 of the first M tile carries the vector
        wr_[j][q] = (cplx && q != 0) ? 0 : rnd(200);
        wi[j][q]  = (cplx && q == 0) ? rnd(200) : 0;
        wr_bank(1, q % 8, 10 + 8 * ((q / 8) * kt + j / 8) + j % 8, wr_[j][q], wi[j][q]);
      end
    dd = '0;
    dd.mode = MODE_WS; dd.cplx = cplx; dd.n = 16'(n); dd.kt = 4'(kt); dd.mt = 4'(mt);
    dd.w_base = 10; dd.x_base = 100; dd.out_base = 2000;
    run(dd, cyc);
    p = cplx ? 4 : 1;
    check_cycles(cplx ? "complex matrix-vector" : "real matrix product", cyc,
                 n * kt * mt * p, 8 * kt * mt + n * kt * mt * p + 30);
    for (int i = 0; i < n; i++)
      for (int q = 0; q < m; q++) begin
        er = 0; ei = 0;
        for (int j = 0; j < k; j++) begin
          er += xr[i][j] * wr_[j][q] - xi[i][j] * wi[j][q];
          ei += xr[i][j] * wi[j][q] + xi[i][j] * wr_[j][q];
        end
        rd_col(q % 8, 2000 + i * mt + q / 8, gr, gi);
        check($sformatf("ws y[%0d][%0d]", i, q), gr, gi, er, ei);
      end
  endtask

  // FIR / matched filter on kt columns
  task automatic test_fir(input bit cplx, input bit conj, input int n, input int kt);
    int hr[], hi[], xr[], xi[];
    int taps = 8 * kt;
    int er, ei, gr, gi, cyc, p, a, b, c_, d_;
    desc_t dd;
    hr = new[taps]; hi = new[taps]; xr = new[n]; xi = new[n];
    for (int t = 0; t < taps; t++) begin
      hr[t] = rnd(300); hi[t] = cplx ? rnd(300) : 0;
      wr_bank(1, t / 8, 40 + t % 8, hr[t], hi[t]);
    end
    for (int i = 0; i < n; i++) begin
      xr[i] = rnd(300); xi[i] = cplx ? rnd(300) : 0;
      for (int r = 0; r < ROWS; r++) wr_bank(0, r, 600 + i, xr[i], xi[i]);
    end
    dd = '0;
    dd.mode = MODE_WS; dd.fir = 1'b1; dd.cplx = cplx; dd.conj = conj;
    dd.n = 16'(n); dd.kt = 4'(kt); dd.mt = 4'd1;
    dd.w_base = 40; dd.x_base = 600; dd.out_base = 3000;
    run(dd, cyc);
    p = cplx ? 4 : 1;
    check_cycles(cplx ? "complex matched filter" : "real FIR", cyc,
                 (n + 8 * (kt - 1)) * p, 8 + (n + 8 * (kt - 1)) * p + 40);
    for (int i = 0; i < n; i++) begin
      er = 0; ei = 0;
      for (int t = 0; t < taps; t++)
        if (i - t >= 0) begin
          a = hr[t]; b = conj ? -hi[t] : hi[t]; c_ = xr[i - t]; d_ = xi[i - t];
          er += a * c_ - b * d_;
          ei += a * d_ + b * c_;
        end
      rd_col(COLS - 1, 3000 + i, gr, gi);
      check($sformatf("fir y[%0d]", i), gr, gi, er, ei);
    end
  endtask

  // output-stationary sum of outer products, C = x^T conj(y)
  task automatic test_os(input bit cplx, input int n, input int kt, input int mt);
    int xr[][], xi[][], yr[][], yi[][];
    int er, ei, gr, gi, cyc, p;
    desc_t dd;
    xr = new[n]; xi = new[n]; yr = new[n]; yi = new[n];
    for (int s = 0; s < n; s++) begin
      xr[s] = new[8 * kt]; xi[s] = new[8 * kt]; yr[s] = new[8 * mt]; yi[s] = new[8 * mt];
      for (int i = 0; i < 8 * kt; i++) begin
        xr[s][i] = rnd(200); xi[s][i] = cplx ? rnd(200) : 0;
        wr_bank(0, i % 8, 1000 + (i / 8) * n + s, xr[s][i], xi[s][i]);
      end
      for (int j = 0; j < 8 * mt; j++) begin
        yr[s][j] = rnd(200); yi[s][j] = cplx ? rnd(200) : 0;
        wr_bank(1, j % 8, 1500 + (j / 8) * n + s, yr[s][j], yi[s][j]);
      end
    end
    dd = '0;
    dd.mode = MODE_OS; dd.cplx = cplx; dd.conj = 1'b1;
    dd.n = 16'(n); dd.kt = 4'(kt); dd.mt = 4'(mt);
    dd.x_base = 1000; dd.a_base = 1500; dd.out_base = 2500;
    run(dd, cyc);
    p = cplx ? 4 : 1;
    check_cycles("outer product", cyc, kt * mt * n * p, kt * mt * n * p + 40);
    for (int i = 0; i < 8 * kt; i++)
      for (int j = 0; j < 8 * mt; j++) begin
        er = 0; ei = 0;
        for (int s = 0; s < n; s++) begin
          er += xr[s][i] * yr[s][j] + xi[s][i] * yi[s][j];
          ei += xi[s][i] * yr[s][j] - xr[s][i] * yi[s][j];
        end
        rd_col(j % 8, 2500 + i * mt + j / 8, gr, gi);
        check($sformatf("os C[%0d][%0d]", i, j), gr, gi, er, ei);
      end
  endtask

  // element-wise a .* b (conj) ; same_ab gives |a|^2
  task automatic test_ew(input bit cplx, input bit conj, input bit same_ab, input int n);
    int ar[], ai[], br[], bi[];
    int er, ei, gr, gi, cyc, bb;
    desc_t dd;
    ar = new[n]; ai = new[n]; br = new[n]; bi = new[n];
    for (int i = 0; i < n; i++) begin
      ar[i] = rnd(1000); ai[i] = cplx ? rnd(1000) : 0;
      br[i] = same_ab ? ar[i] : rnd(1000);
      bi[i] = same_ab ? ai[i] : (cplx ? rnd(1000) : 0);
      wr_bank(1, i % 8, 3500 + i / 8, ar[i], ai[i]);
      wr_bank(1, i % 8, 3700 + i / 8, br[i], bi[i]);
    end
    dd = '0;
    dd.mode = MODE_EW; dd.cplx = cplx; dd.conj = conj; dd.n = 16'(n);
    dd.a_base = 3500; dd.b_base = 3700; dd.out_base = 3900;
    run(dd, cyc);
    check_cycles(cplx ? "magnitude squared" : "element-wise product", cyc, n / 8, n / 8 + 30);
    for (int i = 0; i < n; i++) begin
      bb = conj ? -bi[i] : bi[i];
      er = ar[i] * br[i] - ai[i] * bb;
      ei = ar[i] * bb + ai[i] * br[i];
      rd_col(i % 8, 3900 + i / 8, gr, gi);
      check($sformatf("ew z[%0d]", i), gr, gi, er, ei);
    end
  endtask

  initial begin
    int total_defer;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    test_ws(1'b0, 32, 2, 2);
    test_ws(1'b1, 32, 1, 1);
    test_fir(1'b0, 1'b0, 48, 4);
    test_fir(1'b1, 1'b1, 40, 2);
    test_os(1'b1, 24, 2, 1);
    test_ew(1'b1, 1'b1, 1'b1, 64);
    test_ew(1'b0, 1'b0, 1'b0, 32);

    total_defer = 0;
    foreach (defer[i]) total_defer += defer[i];
    $display("mechanisms: weight tiles %0d, K accumulation %0d, chain %0d, input delay %0d, deferred results %0d",
             n_tiles_used, n_kacc, n_chain, n_delay, total_defer);
    $display("modes: WS %0d, OS %0d, EW %0d, complex %0d", n_ws, n_os, n_ew, n_cplx);
    checks++; if (n_tiles_used == 0) begin failures++; $display("FAIL: weight tiles never used"); end
    checks++; if (n_kacc == 0)       begin failures++; $display("FAIL: no K accumulation"); end
    checks++; if (n_chain == 0)      begin failures++; $display("FAIL: chain never used"); end
    checks++; if (n_delay == 0)      begin failures++; $display("FAIL: input delay never used"); end
    checks++; if (total_defer == 0)  begin failures++; $display("FAIL: no deferred result"); end
    checks++; if (n_ws == 0 || n_os == 0 || n_ew == 0 || n_cplx == 0) begin
      failures++; $display("FAIL: a mode was never run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
