// sa_array: the ROWS x COLS grid of processing elements (8 x 8 in the paper).
//
// Operand bundles enter at the left edge, one per row, and move right through
// each PE's input buffer. Weight / operand-pair bundles enter at the top, one
// per column, and move down one PE per cycle. Partial sums and results move
// down the columns and leave at the bottom edge, where the accumulator row
// takes them. The top row's partial-sum input is zero. All PEs share one static
// configuration word. Timing alignment between rows and columns (the systolic
// skew) is produced by whoever drives the edges (sa_ctrl).
module sa_array
  import sa_pkg::*;
#(
  parameter int ROWS = 8,
  parameter int COLS = 8,
  parameter int NBUF = 4,
  parameter int DMAX = 33
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  inp_t inp_left [ROWS],   // left edge, row r
  input  dat_t dat_top  [COLS],   // top edge, column c
  output res_t res_bot  [COLS]    // bottom edge, column c
);

  inp_t inp_h [ROWS][COLS+1];   // horizontal links, [r][c] enters PE(r,c)
  dat_t dat_v [ROWS+1][COLS];   // vertical data links, [r][c] enters PE(r,c)
  res_t res_v [ROWS+1][COLS];   // vertical result links

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign inp_h[r][0] = inp_left[r];
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign dat_v[0][c] = dat_top[c];
    assign res_v[0][c] = '0;
    assign res_bot[c]  = res_v[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      sa_pe #(.ROW(r), .NBUF(NBUF), .DMAX(DMAX)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .cfg    (cfg),
        .inp_in (inp_h[r][c]),
        .inp_out(inp_h[r][c+1]),
        .dat_in (dat_v[r][c]),
        .dat_out(dat_v[r+1][c]),
        .res_in (res_v[r][c]),
        .res_out(res_v[r+1][c])
      );
    end
  end

endmodule
