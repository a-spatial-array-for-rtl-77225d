// sa_top: the spatial array with its memories, accumulators and sequencer.
//
// Structure (after the paper's block drawing): an 8x8 array of processing
// elements; one SRAM bank per row on the left (one read per cycle) feeding
// operands from the left; one SRAM bank per column on top (two reads per
// cycle) feeding weights and operands from the top; a row of accumulators under
// the array, chained horizontally and ending in an extra accumulator, writing
// results back into the column banks. The paper draws the column banks twice
// (read at the top, written at the bottom); here they are the same banks, so a
// kernel's results can be the next kernel's operands.
//
// Use: while idle (busy low) the host loads and reads the banks through the
// host port: host_col selects a column (1) or row (0) bank, host_bank its
// index; host_rdata returns the word one cycle after host_re. The host then
// places a kernel descriptor on desc and pulses start. The sequencer runs the
// kernel, pulses done when the last result has been written and leaves the
// kernel's cycle count on 'cycles'. Host accesses while busy are ignored.
module sa_top
  import sa_pkg::*;
#(
  parameter int ROWS = 8,
  parameter int COLS = 8,
  parameter int NBUF = 4,
  parameter int DMAX = 33
) (
  input  logic              clk,
  input  logic              rst_n,
  // kernel control
  input  logic              start,
  input  desc_t             desc,
  output logic              busy,
  output logic              done,
  output logic [31:0]       cycles,
  // host access to the banks
  input  logic              host_we,
  input  logic              host_re,
  input  logic              host_col,
  input  logic [3:0]        host_bank,
  input  logic [ADDR_W-1:0] host_addr,
  input  cword_t            host_wdata,
  output cword_t            host_rdata
);

  localparam int DEPTH = 1 << ADDR_W;

  cfg_t              cfg;
  logic [ADDR_W-1:0] out_base;

  logic              row_re    [ROWS];
  logic [ADDR_W-1:0] row_addr  [ROWS];
  cword_t            row_rdata [ROWS];
  logic              col_re0   [COLS];
  logic [ADDR_W-1:0] col_addr0 [COLS];
  cword_t            col_rdata0[COLS];
  logic              col_re1   [COLS];
  logic [ADDR_W-1:0] col_addr1 [COLS];
  cword_t            col_rdata1[COLS];

  inp_t              inp_left [ROWS];
  dat_t              dat_top  [COLS];
  res_t              res_bot  [COLS];

  logic              wr_en    [COLS];
  logic [TAG_W-1:0]  wr_tag   [COLS];
  cword_t            wr_data  [COLS];
  logic [3:0]        n_wr;

  sa_ctrl #(.ROWS(ROWS), .COLS(COLS)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .desc      (desc),
    .busy      (busy),
    .done      (done),
    .cycles    (cycles),
    .cfg       (cfg),
    .out_base  (out_base),
    .row_re    (row_re),
    .row_addr  (row_addr),
    .row_rdata (row_rdata),
    .col_re0   (col_re0),
    .col_addr0 (col_addr0),
    .col_rdata0(col_rdata0),
    .col_re1   (col_re1),
    .col_addr1 (col_addr1),
    .col_rdata1(col_rdata1),
    .inp_left  (inp_left),
    .dat_top   (dat_top),
    .n_wr      (n_wr)
  );

  sa_array #(.ROWS(ROWS), .COLS(COLS), .NBUF(NBUF), .DMAX(DMAX)) u_array (
    .clk     (clk),
    .rst_n   (rst_n),
    .cfg     (cfg),
    .inp_left(inp_left),
    .dat_top (dat_top),
    .res_bot (res_bot)
  );

  sa_acc_row #(.COLS(COLS)) u_acc (
    .clk    (clk),
    .rst_n  (rst_n),
    .cfg    (cfg),
    .res_bot(res_bot),
    .wr_en  (wr_en),
    .wr_tag (wr_tag),
    .wr_data(wr_data)
  );

  always_comb begin
    n_wr = '0;
    for (int c = 0; c < COLS; c++) n_wr = n_wr + 4'(wr_en[c]);
  end

  // ------------------------------------------------------------------ banks
  logic host_sel_q;
  logic [3:0] host_bank_q;

  for (genvar r = 0; r < ROWS; r++) begin : g_rbank
    logic h;
    assign h = !busy && !host_col && (host_bank == 4'(r));
    sa_row_sram #(.DEPTH(DEPTH)) u_bank (
      .clk  (clk),
      .re   (busy ? row_re[r] : (h && host_re)),
      .raddr(busy ? row_addr[r] : host_addr),
      .rdata(row_rdata[r]),
      .we   (h && host_we),
      .waddr(host_addr),
      .wdata(host_wdata)
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_cbank
    logic h;
    assign h = !busy && host_col && (host_bank == 4'(c));
    sa_col_sram #(.DEPTH(DEPTH)) u_bank (
      .clk   (clk),
      .re0   (col_re0[c]),
      .raddr0(col_addr0[c]),
      .rdata0(col_rdata0[c]),
      .re1   (busy ? col_re1[c] : (h && host_re)),
      .raddr1(busy ? col_addr1[c] : host_addr),
      .rdata1(col_rdata1[c]),
      .we    (busy ? wr_en[c] : (h && host_we)),
      .waddr (busy ? out_base + ADDR_W'(wr_tag[c]) : host_addr),
      .wdata (busy ? wr_data[c] : host_wdata)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_sel_q  <= 1'b0;
      host_bank_q <= '0;
    end else if (host_re) begin
      host_sel_q  <= host_col;
      host_bank_q <= host_bank;
    end
  end

  always_comb begin
    host_rdata = '0;
    for (int i = 0; i < ROWS; i++)
      if (!host_sel_q && host_bank_q == 4'(i)) host_rdata = row_rdata[i];
    for (int i = 0; i < COLS; i++)
      if (host_sel_q && host_bank_q == 4'(i)) host_rdata = col_rdata1[i];
  end

endmodule
