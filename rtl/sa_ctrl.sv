// sa_ctrl: kernel sequencer of the spatial array.
//
// The paper evaluates several kernel mappings on the array but does not
// describe the control that runs them; this sequencer is this design's own and
// is the simplest one that drives the mappings implemented here. It takes a
// kernel descriptor (desc_t), configures the PEs, and then drives the SRAM read
// ports and the array edges cycle by cycle:
//
//   LOAD    (weight-stationary kernels only) every column bank streams its
//           weights down the column, one word per cycle, each addressed to one
//           row and one weight-buffer entry: 8 cycles per weight tile.
//   STREAM  a reference "beat" is produced each cycle from nested counters and
//           copied to row r delayed by r cycles (2r for complex
//           weight-stationary kernels, whose partial sums take two cycles per
//           row) and, for output-stationary kernels, to column c delayed by c
//           cycles. That delay is the systolic skew. Each lane turns its beat into an SRAM address, reads
//           the bank and, one cycle later, presents the word as a bundle at its
//           array edge. Complex operands are presented for 4 cycles (phases
//           0..3), real ones for one.
//           The operand fields of the top bundles are the column banks' read
//           data passed straight through (the banks already register them);
//           only the control fields come from the lane's beat.
//   DRAIN   waits until the accumulator row has written the expected number of
//           results, then pulses done; 'cycles' holds the kernel's cycle count
//           from start to done.
//
// Mappings (see desc_t):
//   WS  Y[n][m] = sum_k X[n][k] W[k][m]. Row bank r holds X[n][8*kt+r] at
//       x_base + n*KT + kt; column bank c holds weight tile t (t = mt*KT+kt)
//       at w_base + 8*t + r. Beat order n, mt, kt, phase. Result Y[n][8*mt+c]
//       goes to column bank c at out_base + n*MT + mt.
//   WS-FIR (desc.fir) y[n] = sum_k h[k] x[n-k], 8*KT taps on KT columns.
//       Column bank c holds h[8c+r] at w_base + r; every row bank holds x at
//       x_base + i. Row r reads sample s-PRE-r for slot s (PRE = 8*(KT-1)),
//       zero before the start. Input buffers delay 8P+1; the accumulator
//       chain sums the KT columns; y[n] goes to the last column bank at
//       out_base + n.
//   OS  C[i][j] = sum_n x[n][i] * y[n][j] (y conjugated if conj). Row bank r
//       holds x[n][8*ti+r] at x_base + ti*N + n; column bank c holds
//       y[n][8*tj+c] at a_base + tj*N + n. C[8*ti+r][8*tj+c] goes to column
//       bank c at out_base + (8*ti+r)*MT + tj.
//   EW  z[i] = a[i] * b[i] (b conjugated if conj), N a multiple of 8. Column
//       bank c holds a[8j+c] at a_base + j and b[8j+c] at b_base + j, read on
//       its two ports in the same cycle; z[8j+c] goes to bank c at out_base+j.
module sa_ctrl
  import sa_pkg::*;
#(
  parameter int ROWS = 8,
  parameter int COLS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  desc_t             desc,
  output logic              busy,
  output logic              done,
  output logic [31:0]       cycles,
  output cfg_t              cfg,
  output logic [ADDR_W-1:0] out_base,   // result base address of the running kernel
  // row banks
  output logic              row_re    [ROWS],
  output logic [ADDR_W-1:0] row_addr  [ROWS],
  input  cword_t            row_rdata [ROWS],
  // column banks, two read ports
  output logic              col_re0    [COLS],
  output logic [ADDR_W-1:0] col_addr0  [COLS],
  input  cword_t            col_rdata0 [COLS],
  output logic              col_re1    [COLS],
  output logic [ADDR_W-1:0] col_addr1  [COLS],
  input  cword_t            col_rdata1 [COLS],
  // array edges
  output inp_t              inp_left [ROWS],
  output dat_t              dat_top  [COLS],
  // results written this cycle by the accumulator row
  input  logic [3:0]        n_wr
);

  localparam int LANES = (2 * ROWS > COLS) ? 2 * ROWS : COLS;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DRAIN} state_e;
  typedef enum logic [1:0] {K_LOAD, K_WS, K_OS, K_EW} kind_e;

  typedef struct packed {
    logic        valid;
    kind_e       kind;
    logic [1:0]  i0;    // phase
    logic [15:0] i1;
    logic [15:0] i2;
    logic [15:0] i3;
  } beat_t;

  state_e      st;
  desc_t       d;
  logic [1:0]  i0;
  logic [15:0] i1, i2, i3;
  logic [15:0] l0, l1, l2, l3;     // loop limits
  logic [31:0] wcount, wexpect;
  logic [15:0] pre;                // FIR pre-roll slots

  // ------------------------------------------------------------ loop limits
  always_comb begin
    pre = d.fir ? 16'(8 * (int'(d.kt) - 1)) : 16'd0;
    l0 = 16'd1; l1 = 16'd1; l2 = 16'd1; l3 = 16'd1;
    if (st == S_LOAD) begin
      l0 = 16'd1;
      l1 = 16'd8;                                   // row
      l2 = d.fir ? 16'd1 : 16'(d.kt * d.mt);        // tile
      l3 = 16'd1;
    end else begin
      unique case (d.mode)
        MODE_WS: begin
          l0 = d.cplx ? 16'd4 : 16'd1;
          l1 = d.fir ? 16'd1 : 16'(d.kt);
          l2 = d.fir ? 16'd1 : 16'(d.mt);
          l3 = d.n + pre;
        end
        MODE_OS: begin
          l0 = d.cplx ? 16'd4 : 16'd1;
          l1 = d.n;
          l2 = 16'(d.mt);
          l3 = 16'(d.kt);
        end
        default: begin
          l3 = d.n / 16'(COLS);
        end
      endcase
    end
  end

  logic last0, last1, last2, last3;
  assign last0 = (16'(i0) == l0 - 16'd1);
  assign last1 = (i1 == l1 - 16'd1);
  assign last2 = (i2 == l2 - 16'd1);
  assign last3 = (i3 == l3 - 16'd1);

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      d      <= '0;
      cfg    <= '0;
      i0     <= '0;
      i1     <= '0;
      i2     <= '0;
      i3     <= '0;
      wcount <= '0;
      cycles <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st != S_IDLE) begin
        cycles <= cycles + 1;
        wcount <= wcount + 32'(n_wr);
      end
      unique case (st)
        S_IDLE: if (start) begin
          d              <= desc;
          cfg.mode       <= desc.mode;
          cfg.cplx       <= desc.cplx;
          cfg.conj       <= desc.conj;
          cfg.inp_delay  <= desc.fir ? (desc.cplx ? DLY_W'(33) : DLY_W'(9)) : DLY_W'(1);
          cfg.red_cols   <= desc.fir ? desc.kt : 4'd0;
          st             <= (desc.mode == MODE_WS) ? S_LOAD : S_STREAM;
          {i0, i1, i2, i3} <= '0;
          wcount         <= '0;
          cycles         <= 32'd1;
        end
        S_LOAD, S_STREAM: begin
          i0 <= last0 ? '0 : i0 + 1'b1;
          if (last0) begin
            i1 <= last1 ? '0 : i1 + 1'b1;
            if (last1) begin
              i2 <= last2 ? '0 : i2 + 1'b1;
              if (last2) begin
                i3 <= last3 ? '0 : i3 + 1'b1;
                if (last3) st <= (st == S_LOAD) ? S_STREAM : S_DRAIN;
              end
            end
          end
        end
        default: if (wcount >= wexpect) begin  // S_DRAIN
          st   <= S_IDLE;
          done <= 1'b1;
        end
      endcase
    end
  end

  always_comb begin
    unique case (d.mode)
      MODE_WS: wexpect = d.fir ? 32'(d.n) : 32'(d.n) * 32'(d.mt) * 32'(COLS);
      MODE_OS: wexpect = 32'(d.kt) * 32'(d.mt) * 32'(ROWS * COLS);
      default: wexpect = 32'(d.n);
    endcase
  end

  assign busy     = (st != S_IDLE);
  assign out_base = d.out_base;

  // ------------------------------------------------------ reference beat
  beat_t ref_beat;
  always_comb begin
    ref_beat       = '0;
    ref_beat.valid = (st == S_LOAD) || (st == S_STREAM);
    ref_beat.i0    = i0;
    ref_beat.i1    = i1;
    ref_beat.i2    = i2;
    ref_beat.i3    = i3;
    if (st == S_LOAD)         ref_beat.kind = K_LOAD;
    else if (d.mode == MODE_WS) ref_beat.kind = K_WS;
    else if (d.mode == MODE_OS) ref_beat.kind = K_OS;
    else                        ref_beat.kind = K_EW;
  end

  // skew chain: sh[k] is the reference beat delayed by k cycles
  beat_t sh [LANES];
  assign sh[0] = ref_beat;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k < LANES; k++) sh[k] <= '0;
    end else begin
      for (int k = 1; k < LANES; k++) sh[k] <= sh[k-1];
    end
  end

  // ------------------------------------------------------------ row lanes
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    beat_t       b, bq;
    logic        zero, zero_q;
    logic [15:0] xi;
    // complex weight-stationary partial sums need two cycles per row
    assign b = (d.mode == MODE_WS && d.cplx) ? sh[2*r] : sh[r];

    always_comb begin
      row_re[r]   = 1'b0;
      row_addr[r] = '0;
      zero        = 1'b0;
      xi          = '0;
      if (b.valid && b.kind == K_WS) begin
        row_re[r] = 1'b1;
        if (d.fir) begin
          zero        = (b.i3 < pre + 16'(r));
          xi          = b.i3 - pre - 16'(r);
          row_addr[r] = d.x_base + ADDR_W'(xi);
        end else begin
          row_addr[r] = d.x_base + ADDR_W'(b.i3 * 16'(d.kt) + b.i1);
        end
      end else if (b.valid && b.kind == K_OS) begin
        row_re[r]   = 1'b1;
        row_addr[r] = d.x_base + ADDR_W'(b.i3 * d.n + b.i1);
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        bq     <= '0;
        zero_q <= 1'b0;
      end else begin
        bq     <= b;
        zero_q <= zero;
      end
    end

    always_comb begin
      inp_left[r]       = '0;
      inp_left[r].phase = bq.i0;
      inp_left[r].x     = zero_q ? '0 : word2op(row_rdata[r]);
      if (bq.valid && bq.kind == K_WS) begin
        inp_left[r].valid = 1'b1;
        if (d.fir) begin
          inp_left[r].entry = '0;
          inp_left[r].first = 1'b1;
          inp_left[r].last  = 1'b1;
          inp_left[r].wr    = (bq.i3 >= pre);
          inp_left[r].tag   = TAG_W'(bq.i3 - pre);
        end else begin
          inp_left[r].entry = ENTRY_W'(bq.i2 * 16'(d.kt) + bq.i1);
          inp_left[r].first = (bq.i1 == 16'd0);
          inp_left[r].last  = (bq.i1 == 16'(d.kt) - 16'd1);
          inp_left[r].wr    = 1'b1;
          inp_left[r].tag   = TAG_W'(bq.i3 * 16'(d.mt) + bq.i2);
        end
      end else if (bq.valid && bq.kind == K_OS) begin
        inp_left[r].valid = 1'b1;
        inp_left[r].first = (bq.i1 == 16'd0);
        inp_left[r].last  = (bq.i1 == d.n - 16'd1);
        inp_left[r].wr    = 1'b1;
        inp_left[r].tag   = TAG_W'((bq.i3 * 16'd8 + 16'(r)) * 16'(d.mt) + bq.i2);
      end
    end
  end

  // --------------------------------------------------------- column lanes
  for (genvar c = 0; c < COLS; c++) begin : g_col
    beat_t b, bq;
    assign b = (sh[0].kind == K_OS) ? sh[c] : sh[0];

    always_comb begin
      col_re0[c]   = 1'b0;
      col_addr0[c] = '0;
      col_re1[c]   = 1'b0;
      col_addr1[c] = '0;
      if (b.valid) begin
        unique case (b.kind)
          K_LOAD: begin
            col_re0[c]   = 1'b1;
            col_addr0[c] = d.w_base + ADDR_W'(b.i2 * 16'd8 + b.i1);
          end
          K_OS: begin
            col_re0[c]   = 1'b1;
            col_addr0[c] = d.a_base + ADDR_W'(b.i2 * d.n + b.i1);
          end
          K_EW: begin
            col_re0[c]   = 1'b1;
            col_addr0[c] = d.a_base + ADDR_W'(b.i3);
            col_re1[c]   = 1'b1;
            col_addr1[c] = d.b_base + ADDR_W'(b.i3);
          end
          default: ;
        endcase
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) bq <= '0;
      else        bq <= b;
    end

    always_comb begin
      dat_top[c]   = '0;
      dat_top[c].a = word2op(col_rdata0[c]);
      dat_top[c].b = word2op(col_rdata1[c]);
      if (bq.valid) begin
        unique case (bq.kind)
          K_LOAD: begin
            dat_top[c].valid = 1'b1;
            dat_top[c].is_w  = 1'b1;
            dat_top[c].dst   = ROW_W'(bq.i1);
            dat_top[c].entry = ENTRY_W'(bq.i2);
          end
          K_OS: begin
            dat_top[c].valid = 1'b1;
            dat_top[c].phase = bq.i0;
            dat_top[c].first = (bq.i1 == 16'd0);
            dat_top[c].last  = (bq.i1 == d.n - 16'd1);
          end
          K_EW: begin
            dat_top[c].valid = 1'b1;
            dat_top[c].dst   = ROW_W'(bq.i3);
            dat_top[c].tag   = TAG_W'(bq.i3);
          end
          default: ;
        endcase
      end
    end
  end

endmodule
