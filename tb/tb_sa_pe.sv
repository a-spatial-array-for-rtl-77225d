// tb_sa_pe: self-checking test of one processing element (row 2).
//
// Drives the PE's edges directly and compares with hand-computed values:
// weight capture only for the PE's own row, weight-stationary real and complex
// multiply-accumulate (with and without conjugation) including the cycle on
// which the result appears, output-stationary accumulation with the result
// path giving priority to traffic from above, element-wise complex product
// (|a|^2), and the forwarding delays of the input buffer and the data register.
module tb_sa_pe;
  import sa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg = '0;
  inp_t inp_in = '0, inp_out;
  dat_t dat_in = '0, dat_out;
  res_t res_in = '0, res_out;
  int checks = 0, failures = 0;

  sa_pe #(.ROW(2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic tick; @(posedge clk); #1; endtask

  function automatic cop_t c(input int re, input int im);
    cop_t o; o.re = DATA_W'(re); o.im = DATA_W'(im); return o;
  endfunction

  initial begin
    int seen;
    #12 rst_n = 1'b1;
    @(negedge clk);
    // ---------------------------------------------------- weight capture
    cfg.mode = MODE_WS; cfg.inp_delay = 1;
    dat_in = '0; dat_in.valid = 1; dat_in.is_w = 1; dat_in.dst = 2; dat_in.entry = 1; dat_in.a = c(5, -3);
    tick();
    dat_in.dst = 3; dat_in.a = c(99, 99);        // another row's weight: ignored
    tick();
    dat_in = '0;
    chk("data register forwards", dat_out.dst == 3 && dat_out.a == c(99, 99));
    // ------------------------------------------------------ WS real MAC
    inp_in = '0; inp_in.valid = 1; inp_in.entry = 1; inp_in.tag = 7; inp_in.x = c(4, 0);
    inp_in.first = 1; inp_in.last = 1; inp_in.wr = 1;
    res_in = '0; res_in.valid = 1; res_in.tag = 7; res_in.v.re = 100;
    tick();
    chk("ws real sum", res_out.valid && res_out.v.re == 120 && res_out.tag == 7);
    inp_in.valid = 0; res_in.valid = 0;
    tick();
    chk("ws real valid is one cycle", !res_out.valid);
    // --------------------------------------------------- WS complex MAC
    for (int cj = 0; cj < 2; cj++) begin
      cfg.cplx = 1; cfg.conj = cj[0];
      res_in.v.re = 10; res_in.v.im = 20; res_in.valid = 1;
      inp_in.valid = 1; inp_in.x = c(2, 3);
      for (int p = 0; p < 4; p++) begin
        @(negedge clk);
        inp_in.phase = 2'(p);
        tick();
        if (p == 1) chk("complex real part leaves after phase 1",
                        res_out.v.re == (cj ? 11 : 29) && !res_out.valid);
        if (p < 3) chk("no complex result before phase 3", !res_out.valid);
      end
      chk($sformatf("ws complex conj=%0d", cj),
          res_out.valid && res_out.v.re == (cj ? 11 : 29) && res_out.v.im == (cj ? 41 : 29));
      @(negedge clk);
      inp_in.valid = 0; res_in.valid = 0;
    end
    // ------------------------------------------------- OS real, priority
    @(negedge clk);
    cfg = '0; cfg.mode = MODE_OS; cfg.inp_delay = 1;
    for (int k = 0; k < 3; k++) begin
      inp_in = '0; inp_in.valid = 1; inp_in.first = (k == 0); inp_in.last = (k == 2);
      inp_in.wr = 1; inp_in.tag = 33; inp_in.x = c(k + 1, 0);
      dat_in = '0; dat_in.valid = 1; dat_in.a = c(k + 4, 0);
      // traffic from above arrives as our result finishes
      res_in = '0;
      if (k == 2) begin res_in.valid = 1; res_in.tag = 44; res_in.v.re = -5; end
      tick();
      @(negedge clk);
    end
    inp_in = '0; dat_in = '0;
    chk("os: traffic from above first (1)", res_out.valid && res_out.tag == 44);
    res_in.valid = 1; res_in.tag = 45;              // still busy from above
    tick();
    @(negedge clk); res_in = '0;
    chk("os: traffic from above first (2)", res_out.valid && res_out.tag == 45);
    tick();
    chk("os: own result after the gap", res_out.valid && res_out.tag == 33 && res_out.v.re == 32);
    tick();
    chk("os: result sent once", !res_out.valid);
    // ---------------------------------------------------- EW complex |a|^2
    @(negedge clk);
    cfg = '0; cfg.mode = MODE_EW; cfg.cplx = 1; cfg.conj = 1; cfg.inp_delay = 1;
    dat_in = '0; dat_in.valid = 1; dat_in.dst = 1; dat_in.a = c(7, 7); dat_in.b = c(7, 7);
    tick();                                          // other row: ignored
    @(negedge clk);
    dat_in.dst = 2; dat_in.tag = 9; dat_in.a = c(3, -4); dat_in.b = c(3, -4);
    tick();
    @(negedge clk);
    dat_in = '0;
    seen = 0;
    for (int t = 0; t < 8; t++) begin
      tick();
      if (res_out.valid) begin
        seen++;
        chk("ew magnitude", res_out.tag == 9 && res_out.v.re == 25 && res_out.v.im == 0);
        chk("ew latency 5 cycles after capture", t == 4);
      end
    end
    chk("ew exactly one result", seen == 1);
    // ------------------------------------------------------ input delay
    @(negedge clk);
    cfg = '0; cfg.mode = MODE_EW; cfg.inp_delay = 3;
    repeat (4) tick();
    for (int t = 0; t < 12; t++) begin
      @(negedge clk);
      inp_in = '0; inp_in.valid = 1; inp_in.tag = TAG_W'(t + 100);
      tick();
      if (t >= 2) chk("input buffer: 3 register stages", inp_out.valid && inp_out.tag == TAG_W'(t + 98));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
