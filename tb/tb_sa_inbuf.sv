// tb_sa_inbuf: self-checking test of the PE input buffer. For delays 1, 2, 9,
// 33 (the settings used by matrix, real-FIR and complex-FIR mappings) it feeds
// a random bundle every cycle and checks that each leaves after exactly
// 'delay' register stages, comparing against a history of what was fed.
module tb_sa_inbuf;
  import sa_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [DLY_W-1:0] delay = 6'd1;
  inp_t din = '0, dout;
  inp_t hist [$];
  int checks = 0, failures = 0;
  int dl [4] = '{1, 2, 9, 33};

  sa_inbuf #(.DMAX(33)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12 rst_n = 1'b1;
    #1;
    checks++; if (dout.valid) begin failures++; $display("FAIL reset"); end
    foreach (dl[k]) begin
      @(negedge clk);
      delay = DLY_W'(dl[k]);
      hist.delete();
      for (int t = 0; t < 120; t++) begin
        @(negedge clk);
        din = inp_t'({$urandom, $urandom, $urandom});
        hist.push_back(din);
        @(posedge clk); #1;
        if (t >= dl[k]) begin
          checks++;
          if (dout != hist[t - dl[k] + 1]) begin
            failures++;
            if (failures < 10) $display("FAIL delay %0d at %0d", dl[k], t);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
