// tb_sa_row_sram: self-checking test of a row SRAM bank. Random traffic on the
// write and read ports, compared with a model: a read returns, one cycle after
// its address, the word stored before that cycle's write; a cycle without a
// read keeps the previous output.
module tb_sa_row_sram;
  import sa_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 1'b0;
  logic re = 0, we = 0;
  logic [5:0] raddr = '0, waddr = '0;
  cword_t rdata, wdata = '0;
  cword_t model [DEPTH];
  cword_t expv;
  int checks = 0, failures = 0;

  sa_row_sram #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = cword_t'({$urandom, $urandom}); model[a] = wdata;
    end
    @(negedge clk); we = 0; re = 1; raddr = 0; expv = model[0];
    @(posedge clk);
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      we = 1'($urandom_range(1)); waddr = 6'($urandom); wdata = cword_t'({$urandom, $urandom});
      re = 1'($urandom_range(1)); raddr = (t % 3 == 0) ? waddr : 6'($urandom);
      if (re) expv = model[raddr];
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata != expv) begin failures++; $display("FAIL read at %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
