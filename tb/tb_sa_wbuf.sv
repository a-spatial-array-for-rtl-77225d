// tb_sa_wbuf: self-checking test of the PE weight buffer. Checks that reset
// clears every entry, that a write lands only in the addressed entry and is
// readable on the next cycle, and random write/read traffic against a model.
module tb_sa_wbuf;
  import sa_pkg::*;
  localparam int NBUF = 4;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [1:0] waddr = '0, raddr = '0;
  cop_t wdata = '0, rdata;
  cop_t model [NBUF];
  int checks = 0, failures = 0;

  sa_wbuf #(.NBUF(NBUF)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12 rst_n = 1'b1;
    for (int i = 0; i < NBUF; i++) begin
      model[i] = '0;
      raddr = 2'(i); #1;
      checks++; if (rdata != '0) begin failures++; $display("FAIL reset entry %0d", i); end
    end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = 1'($urandom_range(1));
      waddr = 2'($urandom_range(NBUF - 1));
      wdata = cop_t'($urandom);
      raddr = 2'($urandom_range(NBUF - 1));
      #1;
      checks++;
      if (rdata != model[raddr]) begin
        failures++; $display("FAIL read entry %0d", raddr);
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
