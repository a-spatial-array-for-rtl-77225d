// tb_sa_array: self-checking test of the 8x8 PE grid driven at its edges.
//   Part 1: real weight-stationary product. Weights W[r][c] are sent down the
//   columns as weight bundles, then 24 input vectors enter row r skewed by r
//   cycles; column c must deliver sum_r x[n][r]*W[r][c] for every n, tagged
//   n, all with the same latency from n + c.
//   Part 2: complex element-wise |a|^2: column c receives one operand pair per
//   cycle addressed to rows 0..7 in turn; every result must come out once,
//   with its tag and value, one per cycle per column at most.
module tb_sa_array;
  import sa_pkg::*;
  localparam int ROWS = 8, COLS = 8, N = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg = '0;
  inp_t inp_left [ROWS];
  dat_t dat_top [COLS];
  res_t res_bot [COLS];
  int checks = 0, failures = 0;
  int w [ROWS][COLS];
  int x [N][ROWS];
  int cyc = 0;

  sa_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_edges;
    for (int r = 0; r < ROWS; r++) inp_left[r] = '0;
    for (int c = 0; c < COLS; c++) dat_top[c] = '0;
  endtask

  // result monitor
  int lat = -1, nres = 0, seen [int];
  int part = 1;
  int ew_val [int];
  always @(posedge clk) begin
    for (int c = 0; c < COLS; c++) if (res_bot[c].valid) begin
      int n, e;
      n = int'(res_bot[c].tag);
      nres++;
      checks++;
      if (part == 1) begin
        e = 0;
        for (int r = 0; r < ROWS; r++) e += x[n][r] * w[r][c];
        if (lat < 0) lat = cyc - n - c;
        if (res_bot[c].v.re != e || cyc - n - c != lat) begin
          failures++; $display("FAIL ws col %0d n %0d: %0d vs %0d", c, n, res_bot[c].v.re, e);
        end
      end else begin
        if (seen.exists(n * COLS + c) || res_bot[c].v.re != ew_val[n * COLS + c] || res_bot[c].v.im != 0) begin
          failures++; $display("FAIL ew col %0d tag %0d", c, n);
        end
        seen[n * COLS + c] = 1;
      end
    end
  end

  initial begin
    clear_edges();
    #12 rst_n = 1'b1;
    cfg.mode = MODE_WS; cfg.inp_delay = 1;
    foreach (w[r, c]) w[r][c] = int'($urandom_range(400)) - 200;
    foreach (x[n, r]) x[n][r] = int'($urandom_range(400)) - 200;
    for (int s = 0; s < ROWS; s++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        dat_top[c] = '0; dat_top[c].valid = 1; dat_top[c].is_w = 1;
        dat_top[c].dst = ROW_W'(s); dat_top[c].a.re = DATA_W'(w[s][c]);
      end
    end
    @(negedge clk); clear_edges();
    repeat (8) @(negedge clk);
    for (int t = 0; t < N + ROWS; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        inp_left[r] = '0;
        if (t - r >= 0 && t - r < N) begin
          inp_left[r].valid = 1; inp_left[r].first = 1; inp_left[r].last = 1; inp_left[r].wr = 1;
          inp_left[r].tag = TAG_W'(t - r); inp_left[r].x.re = DATA_W'(x[t - r][r]);
        end
      end
      @(negedge clk);
    end
    clear_edges();
    repeat (30) @(negedge clk);
    checks++;
    if (nres != N * COLS) begin failures++; $display("FAIL ws: %0d results", nres); end
    // ------------------------------------------------------------ part 2
    part = 2; nres = 0;
    cfg.mode = MODE_EW; cfg.cplx = 1; cfg.conj = 1;
    for (int j = 0; j < 32; j++) begin
      for (int c = 0; c < COLS; c++) begin
        int ar, ai;
        ar = int'($urandom_range(600)) - 300; ai = int'($urandom_range(600)) - 300;
        ew_val[j * COLS + c] = ar * ar + ai * ai;
        dat_top[c] = '0; dat_top[c].valid = 1; dat_top[c].dst = ROW_W'(j); dat_top[c].tag = TAG_W'(j);
        dat_top[c].a.re = DATA_W'(ar); dat_top[c].a.im = DATA_W'(ai); dat_top[c].b = dat_top[c].a;
      end
      @(negedge clk);
    end
    clear_edges();
    repeat (30) @(negedge clk);
    checks++;
    if (nres != 32 * COLS) begin failures++; $display("FAIL ew: %0d results", nres); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
