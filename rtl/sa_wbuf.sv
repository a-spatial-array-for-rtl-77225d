// sa_wbuf: the "weight & data buffer" of one processing element.
//
// A small register file holding NBUF complex weights. Keeping several entries
// lets the array hold more than one weight tile at a time, so a matrix product
// whose K or M dimension exceeds the array can be computed without reloading
// weights from SRAM; each streamed operand names the entry it is to be
// multiplied with. The paper gives the buffer's purpose (storing multiple weight
// tiles); its depth (4 entries) is this design's choice.
//
// Interface: one synchronous write port (we/waddr/wdata) and one asynchronous
// read port (raddr/rdata). A write is visible to reads from the next cycle.
// Reset clears every entry.
module sa_wbuf
  import sa_pkg::*;
#(
  parameter int NBUF = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(NBUF)-1:0]  waddr,
  input  cop_t                     wdata,
  input  logic [$clog2(NBUF)-1:0]  raddr,
  output cop_t                     rdata
);

  cop_t mem [NBUF];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBUF; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata = mem[raddr];

endmodule
