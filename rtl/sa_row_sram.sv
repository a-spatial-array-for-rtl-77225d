// sa_row_sram: one row SRAM bank (SRAM_R1..R8 in the paper's drawing).
//
// Each row of the array is fed from the left by its own bank, which the paper
// assumes delivers one read per cycle. Modelled as a register array with one
// synchronous read port (data one cycle after the address) and one write port,
// used to load the bank. Depth (4096 words of 64 bits) is this design's
// choice. Contents are not reset.
module sa_row_sram
  import sa_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output cword_t                   rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  cword_t                   wdata
);

  cword_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
