// tb_sa_acc_row: self-checking test of the accumulator row.
//   Part 1 (chain off): each column receives groups of 1..3 partial results
//   marked first..last; the bench checks that exactly one write per group
//   appears, one cycle after the last partial, with the group's sum and tag.
//   Part 2 (chain on, 3 columns): columns 0..2 receive results of the same
//   index one cycle apart, as the array delivers them; the bench checks that
//   only the last column bank is written, with the three-column sum, the tag
//   and write flag of column 0, red_cols+2 edges after column 0's result, and
//   that an unflagged (wr=0) result is not written.
module tb_sa_acc_row;
  import sa_pkg::*;
  localparam int COLS = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg = '0;
  res_t res_bot [COLS];
  logic wr_en [COLS];
  logic [TAG_W-1:0] wr_tag [COLS];
  cword_t wr_data [COLS];
  int checks = 0, failures = 0;

  sa_acc_row #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic clear_in;
    for (int c = 0; c < COLS; c++) res_bot[c] = '0;
  endtask

  initial begin
    int glen, sre [COLS], sim [COLS], nw;
    clear_in();
    #12 rst_n = 1'b1;
    // ---------------------------------------------------------- part 1
    for (int g = 0; g < 20; g++) begin
      glen = 1 + g % 3;
      foreach (sre[c]) begin sre[c] = 0; sim[c] = 0; end
      for (int k = 0; k < glen; k++) begin
        @(negedge clk);
        for (int c = 0; c < COLS; c++) begin
          res_bot[c] = '0;
          res_bot[c].valid = 1; res_bot[c].first = (k == 0); res_bot[c].last = (k == glen - 1);
          res_bot[c].wr = 1; res_bot[c].tag = TAG_W'(g * 10 + c);
          res_bot[c].v.re = int'($urandom_range(2000)) - 1000;
          res_bot[c].v.im = int'($urandom_range(2000)) - 1000;
          sre[c] += res_bot[c].v.re; sim[c] += res_bot[c].v.im;
        end
        @(posedge clk); #1;
        if (k < glen - 1) for (int c = 0; c < COLS; c++) begin
          checks++;
          if (wr_en[c]) begin failures++; $display("FAIL early write col %0d", c); end
        end
      end
      @(negedge clk); clear_in();
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (!wr_en[c] || wr_tag[c] != TAG_W'(g * 10 + c) || wr_data[c].re != sre[c] || wr_data[c].im != sim[c]) begin
          failures++; $display("FAIL group %0d col %0d", g, c);
        end
      end
    end
    // ---------------------------------------------------------- part 2
    @(negedge clk); cfg.red_cols = 4'd3;
    repeat (3) @(negedge clk);
    nw = 0;
    fork
      begin
        for (int n = 0; n < 12; n++) begin
          // column c delivers index n at cycle n + c
          @(negedge clk);
          clear_in();
          for (int c = 0; c < 3; c++) begin
            if (n - c >= 0 && n - c < 10) begin
              res_bot[c].valid = 1; res_bot[c].first = 1; res_bot[c].last = 1;
              res_bot[c].wr = (n - c) != 4;                 // index 4 not written
              res_bot[c].tag = (c == 0) ? TAG_W'(n) : TAG_W'(999);
              res_bot[c].v.re = (n - c) * 100 + c;
              res_bot[c].v.im = -(n - c);
            end
          end
        end
        @(negedge clk); clear_in();
      end
      begin
        // write for index i expected after edge i + 1 + red_cols + 1
        for (int t = 0; t < 20; t++) begin
          @(posedge clk); #1;
          for (int c = 0; c < COLS - 1; c++) begin
            checks++;
            if (wr_en[c]) begin failures++; $display("FAIL chain write on col %0d", c); end
          end
          if (wr_en[COLS-1]) begin
            nw++;
            checks++;
            if (wr_data[COLS-1].re != wr_tag[COLS-1] * 300 + 3 || wr_data[COLS-1].im != -3 * wr_tag[COLS-1] ||
                wr_tag[COLS-1] == 4 || t != int'(wr_tag[COLS-1]) + 5) begin
              failures++; $display("FAIL chain sum tag %0d at %0d", wr_tag[COLS-1], t);
            end
          end
        end
      end
    join
    checks++;
    if (nw != 9) begin failures++; $display("FAIL chain wrote %0d results", nw); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
