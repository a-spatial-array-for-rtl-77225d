// tb_sa_ctrl: self-checking test of the kernel sequencer on its own.
//
// The banks are modelled here: a row bank r returns r*4096+address, a column
// bank c returns c*4096+address (imaginary part 1 on port 0, 2 on port 1), one
// cycle after the read. For each kernel the bench records every bundle the
// sequencer puts on the array edges and compares the sequence with the one the
// mapping prescribes: the weight-load order (row, entry), the operand order
// (n, M tile, K tile, phase) with its first/last flags and tags, the skew of
// r (real) or 2r (complex) cycles between rows and c cycles between columns
// (output-stationary), FIR sample offsets with zero pre-roll, element-wise
// pairs with their destination rows, and the configuration words. It then
// feeds result-write counts and checks that 'done' comes exactly when the
// expected number of results has been written and not before.
module tb_sa_ctrl;
  import sa_pkg::*;
  localparam int ROWS = 8, COLS = 8;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  desc_t desc = '0;
  logic busy, done;
  logic [31:0] cycles;
  cfg_t cfg;
  logic [ADDR_W-1:0] out_base;
  logic row_re [ROWS];
  logic [ADDR_W-1:0] row_addr [ROWS];
  cword_t row_rdata [ROWS];
  logic col_re0 [COLS], col_re1 [COLS];
  logic [ADDR_W-1:0] col_addr0 [COLS], col_addr1 [COLS];
  cword_t col_rdata0 [COLS], col_rdata1 [COLS];
  inp_t inp_left [ROWS];
  dat_t dat_top [COLS];
  logic [3:0] n_wr = '0;
  int checks = 0, failures = 0;
  int cyc = 0;

  sa_ctrl #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bank models
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    for (int r = 0; r < ROWS; r++)
      if (row_re[r]) begin row_rdata[r].re <= r * 4096 + int'(row_addr[r]); row_rdata[r].im <= 0; end
    for (int c = 0; c < COLS; c++) begin
      if (col_re0[c]) begin col_rdata0[c].re <= c * 4096 + int'(col_addr0[c]); col_rdata0[c].im <= 1; end
      if (col_re1[c]) begin col_rdata1[c].re <= c * 4096 + int'(col_addr1[c]); col_rdata1[c].im <= 2; end
    end
  end

  // recorders
  inp_t rin  [ROWS][$];
  int   rint [ROWS][$];
  dat_t cdat [COLS][$];
  int   cdt  [COLS][$];
  always @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) if (inp_left[r].valid) begin rin[r].push_back(inp_left[r]); rint[r].push_back(cyc); end
    for (int c = 0; c < COLS; c++) if (dat_top[c].valid) begin cdat[c].push_back(dat_top[c]); cdt[c].push_back(cyc); end
  end

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  task automatic run(input desc_t dd, input int nwrites);
    int wrote, ndone;
    for (int r = 0; r < ROWS; r++) begin rin[r].delete(); rint[r].delete(); end
    for (int c = 0; c < COLS; c++) begin cdat[c].delete(); cdt[c].delete(); end
    @(negedge clk); desc = dd; start = 1;
    @(negedge clk); start = 0;
    while (dut.st != 2'd3) @(negedge clk);     // until streaming is over
    repeat (40) @(negedge clk);
    wrote = 0; ndone = 0;
    while (wrote < nwrites) begin
      n_wr = 4'((nwrites - wrote >= 5) ? 5 : nwrites - wrote);
      wrote += int'(n_wr);
      chk("no done before all writes", !done);
      @(negedge clk);
    end
    n_wr = 0;
    for (int t = 0; t < 3; t++) begin
      if (done) ndone++;
      @(negedge clk);
    end
    chk("done once after the last write", ndone == 1 && !busy);
  endtask

  function automatic desc_t mk(mode_e m, bit cplx, bit fir, int n, int kt, int mt);
    desc_t d = '0;
    d.mode = m; d.cplx = cplx; d.fir = fir; d.n = 16'(n); d.kt = 4'(kt); d.mt = 4'(mt);
    d.w_base = 12'd16; d.x_base = 12'd200; d.a_base = 12'd300; d.b_base = 12'd400; d.out_base = 12'd500;
    return d;
  endfunction

  initial begin
    desc_t d;
    int k, p, s, pre;
    #12 rst_n = 1'b1;

    // ------------------------------------------------- WS real, 2 x 2 tiles
    d = mk(MODE_WS, 0, 0, 5, 2, 2);
    run(d, 5 * 2 * COLS);
    chk("ws cfg", cfg.mode == MODE_WS && cfg.inp_delay == 1 && cfg.red_cols == 0);
    for (int c = 0; c < COLS; c++) begin
      chk("ws load length", cdat[c].size() == 32);
      for (int i = 0; i < cdat[c].size(); i++)
        chk("ws load word", cdat[c][i].is_w && cdat[c][i].dst == ROW_W'(i % 8) &&
            cdat[c][i].entry == ENTRY_W'(i / 8) && cdat[c][i].a.re == DATA_W'(c * 4096 + 16 + i) &&
            cdt[c][i] == cdt[0][0] + i);
    end
    for (int r = 0; r < ROWS; r++) begin
      chk("ws stream length", rin[r].size() == 20);
      k = 0;
      for (int n = 0; n < 5; n++) for (int mt = 0; mt < 2; mt++) for (int kt = 0; kt < 2; kt++) begin
        chk($sformatf("ws row %0d beat %0d", r, k),
            rin[r][k].x.re == DATA_W'(r * 4096 + 200 + n * 2 + kt) && rin[r][k].entry == ENTRY_W'(mt * 2 + kt) &&
            rin[r][k].first == (kt == 0) && rin[r][k].last == (kt == 1) && rin[r][k].tag == TAG_W'(n * 2 + mt) &&
            rint[r][k] == rint[0][0] + k + r);
        k++;
      end
    end
    chk("ws stream starts after load", rint[0][0] == cdt[0][31] + 1);

    // -------------------------------------------- WS complex: 2-cycle skew
    d = mk(MODE_WS, 1, 0, 3, 1, 1);
    run(d, 3 * COLS);
    for (int r = 0; r < ROWS; r++) begin
      chk("ws complex length", rin[r].size() == 12);
      for (int i = 0; i < 12; i++)
        chk("ws complex beat", rin[r][i].phase == 2'(i % 4) && rin[r][i].x.re == DATA_W'(r * 4096 + 200 + i / 4) &&
            rint[r][i] == rint[0][0] + i + 2 * r);
    end

    // ----------------------------------------------------- FIR real, 3 cols
    d = mk(MODE_WS, 0, 1, 10, 3, 1);
    run(d, 10);
    chk("fir cfg", cfg.inp_delay == 9 && cfg.red_cols == 3);
    pre = 16;
    for (int r = 0; r < ROWS; r++) begin
      chk("fir length", rin[r].size() == 10 + pre);
      for (int i = 0; i < rin[r].size(); i++) begin
        s = i - pre - r;
        chk($sformatf("fir row %0d slot %0d", r, i),
            rin[r][i].x.re == ((s < 0) ? 16'd0 : DATA_W'(r * 4096 + 200 + s)) &&
            rin[r][i].wr == (i >= pre) && (i < pre || rin[r][i].tag == TAG_W'(i - pre)) &&
            rint[r][i] == rint[0][0] + i + r);
      end
    end
    for (int c = 0; c < COLS; c++) chk("fir loads one tile", cdat[c].size() == 8);

    // --------------------------------------------------- OS complex 2 x 1
    d = mk(MODE_OS, 1, 0, 3, 2, 1);
    run(d, 2 * 64);
    chk("os cfg", cfg.mode == MODE_OS && cfg.inp_delay == 1);
    for (int r = 0; r < ROWS; r++) begin
      chk("os row length", rin[r].size() == 24);
      for (int i = 0; i < 24; i++)
        chk("os row beat", rin[r][i].phase == 2'(i % 4) &&
            rin[r][i].x.re == DATA_W'(r * 4096 + 200 + (i / 12) * 3 + (i / 4) % 3) &&
            rin[r][i].first == ((i / 4) % 3 == 0) && rin[r][i].last == ((i / 4) % 3 == 2) &&
            rin[r][i].tag == TAG_W'((i / 12) * 8 + r) && rint[r][i] == rint[0][0] + i + r);
    end
    for (int c = 0; c < COLS; c++) begin
      chk("os column length", cdat[c].size() == 24);
      for (int i = 0; i < 24; i++)
        chk("os column beat", !cdat[c][i].is_w && cdat[c][i].phase == 2'(i % 4) &&
            cdat[c][i].a.re == DATA_W'(c * 4096 + 300 + (i / 4) % 3) && cdt[c][i] == rint[0][0] + i + c);
    end

    // ------------------------------------------------------ EW, 32 elements
    d = mk(MODE_EW, 1, 0, 32, 1, 1);
    run(d, 32);
    for (int c = 0; c < COLS; c++) begin
      chk("ew length", cdat[c].size() == 4);
      for (int j = 0; j < 4; j++)
        chk("ew pair", cdat[c][j].dst == ROW_W'(j) && cdat[c][j].tag == TAG_W'(j) &&
            cdat[c][j].a.re == DATA_W'(c * 4096 + 300 + j) && cdat[c][j].a.im == 1 &&
            cdat[c][j].b.re == DATA_W'(c * 4096 + 400 + j) && cdat[c][j].b.im == 2 &&
            cdt[c][j] == cdt[0][0] + j);
    end
    for (int r = 0; r < ROWS; r++) chk("ew uses no row operands", rin[r].size() == 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
