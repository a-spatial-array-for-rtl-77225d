// sa_pkg: types and constants shared by the spatial-array modules.
//
// The array streams three kinds of bundles between processing elements (PEs):
//   inp_t  - operands entering from the left edge and moving right (row SRAMs),
//   dat_t  - weights or operand pairs entering from the top and moving down
//            (column SRAMs),
//   res_t  - partial sums / finished results moving down to the accumulators.
// Every bundle carries its own valid bit, complex phase and bookkeeping tags, so
// the array needs no broadcast control: each PE reacts only to what arrives.
//
// Word widths are not given by the paper; 16-bit operands and 32-bit
// accumulators are this design's choice. A memory word (cword_t) holds a
// complex value with 32-bit real and imaginary halves; operands use the low
// 16 bits of each half.
package sa_pkg;

  localparam int DATA_W  = 16;  // operand width (assumed)
  localparam int ACC_W   = 32;  // accumulator / memory half-word width (assumed)
  localparam int TAG_W   = 16;  // result index carried with the data
  localparam int ENTRY_W = 2;   // weight-buffer entry index (NBUF <= 4)
  localparam int ADDR_W  = 12;  // SRAM bank address width (4096 words, assumed)
  localparam int ROW_W   = 3;   // row index inside the 8x8 array
  localparam int DLY_W   = 6;   // input-buffer delay setting

  typedef logic signed [DATA_W-1:0] sdata_t;
  typedef logic signed [ACC_W-1:0]  sacc_t;

  // complex operand (real data uses only .re)
  typedef struct packed {
    sdata_t re;
    sdata_t im;
  } cop_t;

  // complex accumulator value, also the SRAM word
  typedef struct packed {
    sacc_t re;
    sacc_t im;
  } cword_t;

  typedef enum logic [1:0] {
    MODE_WS = 2'd0,  // weight stationary, accumulate down the column
    MODE_OS = 2'd1,  // output stationary, accumulate inside each PE
    MODE_EW = 2'd2   // element-wise, one product per operand pair
  } mode_e;

  // static PE configuration, fixed for the duration of one kernel
  typedef struct packed {
    mode_e            mode;
    logic             cplx;       // complex arithmetic: 4 multiplier cycles per MAC
    logic             conj;       // conjugate the stationary / top operand
    logic [DLY_W-1:0] inp_delay;  // cycles an input spends in a PE's input buffer
    logic [3:0]       red_cols;   // columns summed by the horizontal ACC chain (0: off)
  } cfg_t;

  // operand moving right
  typedef struct packed {
    logic               valid;
    logic [1:0]         phase;    // complex sub-step 0..3
    logic [ENTRY_W-1:0] entry;    // weight-buffer entry to use (WS)
    logic               first;    // first term of a sum
    logic               last;     // last term of a sum
    logic               wr;       // result is to be written to memory
    logic [TAG_W-1:0]   tag;      // result index
    cop_t               x;
  } inp_t;

  // weight or operand pair moving down
  typedef struct packed {
    logic               valid;
    logic               is_w;     // weight for the buffer of PE row dst
    logic [ROW_W-1:0]   dst;      // destination row (weights, element-wise pairs)
    logic [ENTRY_W-1:0] entry;    // weight-buffer entry
    logic [1:0]         phase;    // complex sub-step (output-stationary stream)
    logic               first;
    logic               last;
    logic [TAG_W-1:0]   tag;
    cop_t               a;
    cop_t               b;
  } dat_t;

  // partial sum or result moving down
  typedef struct packed {
    logic             valid;
    logic             first;
    logic             last;
    logic             wr;
    logic [TAG_W-1:0] tag;
    cword_t           v;
  } res_t;

  // kernel descriptor handed to the sequencer
  typedef struct packed {
    mode_e             mode;
    logic              cplx;
    logic              conj;
    logic              fir;      // WS: FIR / matched-filter mapping
    logic [15:0]       n;        // vectors (WS/OS) or elements (EW)
    logic [3:0]        kt;       // WS: K tiles (FIR: tap columns); OS: row tiles
    logic [3:0]        mt;       // WS: M tiles; OS: column tiles
    logic [ADDR_W-1:0] w_base;   // weights in the column banks
    logic [ADDR_W-1:0] x_base;   // left operands in the row banks
    logic [ADDR_W-1:0] a_base;   // top operand a (OS y, EW a) in the column banks
    logic [ADDR_W-1:0] b_base;   // top operand b (EW) in the column banks
    logic [ADDR_W-1:0] out_base; // results in the column banks
  } desc_t;

  // 16-bit operand to memory word (sign-extended)
  function automatic cword_t op2word(cop_t o);
    cword_t w;
    w.re = sacc_t'(o.re);
    w.im = sacc_t'(o.im);
    return w;
  endfunction

  // memory word to operand (low bits)
  function automatic cop_t word2op(cword_t w);
    cop_t o;
    o.re = w.re[DATA_W-1:0];
    o.im = w.im[DATA_W-1:0];
    return o;
  endfunction

endpackage
