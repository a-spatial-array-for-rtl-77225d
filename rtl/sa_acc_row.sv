// sa_acc_row: the row of accumulators under the array, their horizontal chain
// and the extra accumulator at the right end (paper: "a row of accumulators
// handles the further accumulation of partial results before writing them to
// memory").
//
// Column accumulator c adds up consecutive results leaving column c, from the
// one marked 'first' to the one marked 'last' (a weight-stationary product
// whose K dimension spans several weight tiles), then presents the total for
// one cycle. Results marked first and last at once pass straight through.
//
// Horizontal chain: with cfg.red_cols = N > 0 the totals of columns 0..N-1 are
// summed by a chain with one register per column, h[c] = total[c] + h[c-1].
// Column c's totals arrive one cycle after column c-1's, which is exactly the
// chain delay, so results of the same index meet. The extra accumulator
// registers h[N-1] and writes it to the last column bank; the index (tag) and
// write flag of the sum are those of column 0. This folds a FIR filter longer
// than one column onto several columns.
//
// Outputs: per column a write request (wr_en, tag, data), one cycle after the
// column total (chain off) or N+1 cycles after column 0's total (chain on).
// The drawing gives the accumulators and the chain; adding per tag and the
// first/last/wr flags are this design's choices.
module sa_acc_row
  import sa_pkg::*;
#(
  parameter int COLS = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  res_t             res_bot [COLS],
  output logic             wr_en   [COLS],
  output logic [TAG_W-1:0] wr_tag  [COLS],
  output cword_t           wr_data [COLS]
);

  function automatic cword_t cadd(cword_t a, cword_t b);
    cword_t s;
    s.re = a.re + b.re;
    s.im = a.im + b.im;
    return s;
  endfunction

  cword_t acc     [COLS];
  res_t   col_out [COLS];
  res_t   h       [COLS];
  res_t   fin;

  for (genvar c = 0; c < COLS; c++) begin : g_acc
    cword_t nxt;
    assign nxt = res_bot[c].first ? res_bot[c].v : cadd(acc[c], res_bot[c].v);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc[c]     <= '0;
        col_out[c] <= '0;
      end else begin
        col_out[c].valid <= 1'b0;
        if (res_bot[c].valid) begin
          acc[c] <= nxt;
          if (res_bot[c].last) begin
            col_out[c].valid <= 1'b1;
            col_out[c].first <= 1'b1;
            col_out[c].last  <= 1'b1;
            col_out[c].wr    <= res_bot[c].wr;
            col_out[c].tag   <= res_bot[c].tag;
            col_out[c].v     <= nxt;
          end
        end
      end
    end

    // horizontal chain stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        h[c] <= '0;
      end else if (c == 0) begin
        h[c] <= col_out[c];
      end else begin
        h[c].valid <= col_out[c].valid && h[(c == 0) ? 0 : c-1].valid;
        h[c].first <= 1'b1;
        h[c].last  <= 1'b1;
        h[c].wr    <= h[(c == 0) ? 0 : c-1].wr;
        h[c].tag   <= h[(c == 0) ? 0 : c-1].tag;
        h[c].v     <= cadd(col_out[c].v, h[(c == 0) ? 0 : c-1].v);
      end
    end
  end

  // extra accumulator at the end of the chain
  logic [3:0] sel;
  assign sel = (cfg.red_cols == 0) ? 4'd0 : cfg.red_cols - 4'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fin <= '0;
    else        fin <= h[sel[$clog2(COLS)-1:0]];
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      if (cfg.red_cols == 0) begin
        wr_en[c]   = col_out[c].valid && col_out[c].wr;
        wr_tag[c]  = col_out[c].tag;
        wr_data[c] = col_out[c].v;
      end else begin
        wr_en[c]   = (c == COLS-1) && fin.valid && fin.wr;
        wr_tag[c]  = fin.tag;
        wr_data[c] = fin.v;
      end
    end
  end

endmodule
