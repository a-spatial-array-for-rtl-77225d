// sa_col_sram: one column SRAM bank (SRAM_C1..C8 in the paper's drawing).
//
// Each column of the array has its own bank. The paper assumes the column
// banks deliver two reads per cycle (so both operands of an element-wise or
// output-stationary kernel, or weights and data, can come from the top) and
// shows them being written from the accumulator row at the bottom. Modelled as
// a register array with two synchronous read ports and one write port; a read
// returns the word one cycle after the address. Reading and writing the same
// address in one cycle returns the old word. Depth (4096 words of 64 bits) is
// this design's choice; the paper gives no memory size. Contents are not reset.
module sa_col_sram
  import sa_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     re0,
  input  logic [$clog2(DEPTH)-1:0] raddr0,
  output cword_t                   rdata0,
  input  logic                     re1,
  input  logic [$clog2(DEPTH)-1:0] raddr1,
  output cword_t                   rdata1,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  cword_t                   wdata
);

  cword_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)  mem[waddr] <= wdata;
    if (re0) rdata0 <= mem[raddr0];
    if (re1) rdata1 <= mem[raddr1];
  end

endmodule
