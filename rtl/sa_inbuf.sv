// sa_inbuf: the "input buffer" of one processing element.
//
// Operands streamed from the left pass through every PE of a row. This buffer
// forwards each operand bundle to the right neighbour after a programmable
// delay of 1..DMAX cycles. A delay of 1 is the plain systolic register used by
// matrix products; a longer delay shifts a sample stream so that the columns of
// the array see successively older samples, which is how a long FIR filter is
// folded onto several columns (delay 8P+1 for P cycles per multiply: 9 for real,
// 33 for complex data). The paper names the buffer and says it is used for
// input shifting and reuse; the circular-buffer realisation and DMAX=33 are this
// design's choice.
//
// Timing: the buffer behaves like a chain of "delay" registers: a bundle
// present at one clock edge appears on dout after edge delay-1 following it
// (delay 1: an ordinary register). The delay must not change while a stream
// is in flight. Reset clears the buffer (all bundles invalid).
module sa_inbuf
  import sa_pkg::*;
#(
  parameter int DMAX = 33
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DLY_W-1:0] delay,   // 1..DMAX
  input  inp_t             din,
  output inp_t             dout
);

  localparam int PW = $clog2(DMAX);

  inp_t          mem [DMAX];
  logic [PW-1:0] wptr;
  logic [PW-1:0] rptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      for (int i = 0; i < DMAX; i++) mem[i] <= '0;
    end else begin
      mem[wptr] <= din;
      wptr      <= (wptr == PW'(DMAX - 1)) ? '0 : wptr + 1'b1;
    end
  end

  // entry written 'delay' cycles ago
  always_comb begin
    if (int'(wptr) >= int'(delay)) rptr = PW'(int'(wptr) - int'(delay));
    else                           rptr = PW'(int'(wptr) + DMAX - int'(delay));
  end

  assign dout = mem[rptr];

endmodule
