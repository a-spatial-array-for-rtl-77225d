// tb_sa_col_sram: self-checking test of a column SRAM bank. Random traffic on
// the write port and both read ports at once, compared with a model: each read
// returns, one cycle after its address, the word stored before that cycle's
// write (read-before-write on the same address).
module tb_sa_col_sram;
  import sa_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 1'b0;
  logic re0 = 0, re1 = 0, we = 0;
  logic [5:0] raddr0 = '0, raddr1 = '0, waddr = '0;
  cword_t rdata0, rdata1, wdata = '0;
  cword_t model [DEPTH];
  cword_t exp0, exp1;
  int checks = 0, failures = 0;

  sa_col_sram #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = cword_t'({$urandom, $urandom}); model[a] = wdata;
    end
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      we = 1'($urandom_range(1)); waddr = 6'($urandom); wdata = cword_t'({$urandom, $urandom});
      re0 = 1; raddr0 = 6'($urandom); re1 = 1; raddr1 = (t % 3 == 0) ? waddr : 6'($urandom);
      exp0 = model[raddr0]; exp1 = model[raddr1];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks += 2;
      if (rdata0 != exp0) begin failures++; $display("FAIL port 0 at %0d", t); end
      if (rdata1 != exp1) begin failures++; $display("FAIL port 1 at %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
