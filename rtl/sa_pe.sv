// sa_pe: one processing element of the spatial array.
//
// Datapath (as in the paper's PE drawing): a weight & data buffer (sa_wbuf), an
// input buffer (sa_inbuf), ONE real multiplier, ONE adder and a PARTIALS
// register, with multiplexers choosing what the multiplier and the adder see.
// A complex multiply-accumulate therefore takes four cycles ("phases"):
//   phase 0: w.re*x.re   phase 1: -w.im*x.im   (real part)
//   phase 2: w.re*x.im   phase 3: +w.im*x.re   (imaginary part)
// With conj set the stationary/top operand w is conjugated (signs of phases 1
// and 3 flip). Real data takes one cycle per multiply-accumulate.
//
// Three modes (cfg.mode), fixed per kernel:
//   MODE_WS  weight stationary, the paper's "accumulate mode": the weight comes
//            from the buffer entry named by the operand; the adder adds the
//            product to the partial sum arriving from the PE above (Res_in)
//            and the sum leaves downward (Res_out). Real: every cycle.
//            Complex: the real part is finished in phase 1 and put on Res_out
//            at once, the imaginary part in phase 3, when Res_out is marked
//            valid. The PE below runs two cycles later (the row skew is 2
//            cycles for complex data) and reads the real part in its phase 0
//            and the imaginary part in its phase 2.
//   MODE_OS  output stationary (outer products): operand x from the left, y
//            from the top, PARTIALS accumulates over the whole stream; the sum
//            is parked in an output holding register when the operand marked
//            'last' has been used.
//   MODE_EW  element-wise, the paper's "element-wise mode": an operand pair
//            travelling down the column is captured by the PE whose row matches
//            its 'dst', multiplied (a * b or a * conj(b)) and parked in the
//            holding register.
// In OS and EW mode finished results are sent down the result path, which they
// share with the results of the PEs above: a result from above always goes
// first and the PE's own result waits in the holding register for a free cycle.
// Each result carries its tag, so the order in which results reach the bottom
// does not matter.
//
// Operands arriving from the left are forwarded right through the input buffer
// (delay cfg.inp_delay); top bundles are forwarded down through one register.
// A weight bundle (dat_in.is_w) whose dst equals ROW is written to the buffer.
// The paper gives the blocks and the two modes; the bundle format, the phase
// schedule, the third (output-stationary) use and the result-path arbitration
// are this design's choices.
module sa_pe
  import sa_pkg::*;
#(
  parameter int ROW  = 0,   // row of this PE in the array
  parameter int NBUF = 4,   // weight-buffer entries
  parameter int DMAX = 33   // longest input-buffer delay
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  inp_t inp_in,
  output inp_t inp_out,
  input  dat_t dat_in,
  output dat_t dat_out,
  input  res_t res_in,
  output res_t res_out
);

  typedef enum logic [2:0] {ADD_ZERO, ADD_RES_RE, ADD_RES_IM, ADD_PART_RE, ADD_PART_IM} add_sel_e;

  // ---------------------------------------------------------------- buffers
  cop_t w_rd;
  logic w_we;
  assign w_we = dat_in.valid && dat_in.is_w && (dat_in.dst == ROW_W'(ROW));

  sa_wbuf #(.NBUF(NBUF)) u_wbuf (
    .clk  (clk),
    .rst_n(rst_n),
    .we   (w_we),
    .waddr(dat_in.entry[$clog2(NBUF)-1:0]),
    .wdata(dat_in.a),
    .raddr(inp_in.entry[$clog2(NBUF)-1:0]),
    .rdata(w_rd)
  );

  sa_inbuf #(.DMAX(DMAX)) u_inbuf (
    .clk  (clk),
    .rst_n(rst_n),
    .delay(cfg.inp_delay),
    .din  (inp_in),
    .dout (inp_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dat_out <= '0;
    else        dat_out <= dat_in;
  end

  // ---------------------------------------------------- element-wise capture
  logic             ew_busy;
  logic [1:0]       ew_phase;
  cop_t             ew_a, ew_b;
  logic [TAG_W-1:0] ew_tag;
  logic             ew_take;
  assign ew_take = (cfg.mode == MODE_EW) && dat_in.valid && !dat_in.is_w &&
                   (dat_in.dst == ROW_W'(ROW));

  // ------------------------------------------------------- operand selection
  cop_t       w, x;
  logic [1:0] ph;
  logic       act;

  always_comb begin
    unique case (cfg.mode)
      MODE_OS: begin w = dat_in.a; x = inp_in.x; ph = inp_in.phase; act = inp_in.valid; end
      MODE_EW: begin w = ew_b;     x = ew_a;     ph = ew_phase;     act = ew_busy;      end
      default: begin w = w_rd;     x = inp_in.x; ph = inp_in.phase; act = inp_in.valid; end
    endcase
  end

  // -------------------------------------------------------------- multiplier
  sdata_t m_a, m_b;
  logic   m_neg;
  sacc_t  prod;

  always_comb begin
    m_a = w.re; m_b = x.re; m_neg = 1'b0;
    if (cfg.cplx) begin
      unique case (ph)
        2'd0: begin m_a = w.re; m_b = x.re; m_neg = 1'b0;      end
        2'd1: begin m_a = w.im; m_b = x.im; m_neg = !cfg.conj; end
        2'd2: begin m_a = w.re; m_b = x.im; m_neg = 1'b0;      end
        default: begin m_a = w.im; m_b = x.re; m_neg = cfg.conj; end
      endcase
    end
  end

  sacc_t m_raw;
  assign m_raw = sacc_t'(m_a) * sacc_t'(m_b);
  assign prod  = m_neg ? -m_raw : m_raw;

  // ------------------------------------------------------------------- adder
  cword_t   part;      // PARTIALS register
  add_sel_e add_sel;
  sacc_t    addend, sum;
  logic     first_op;
  assign first_op = inp_in.first;

  always_comb begin
    add_sel = ADD_ZERO;
    unique case (cfg.mode)
      MODE_WS: begin
        if (!cfg.cplx) add_sel = ADD_RES_RE;
        else unique case (ph)
          2'd0: add_sel = ADD_RES_RE;
          2'd1: add_sel = ADD_PART_RE;
          2'd2: add_sel = ADD_RES_IM;
          default: add_sel = ADD_PART_IM;
        endcase
      end
      MODE_OS: begin
        if (!cfg.cplx) add_sel = first_op ? ADD_ZERO : ADD_PART_RE;
        else unique case (ph)
          2'd0: add_sel = first_op ? ADD_ZERO : ADD_PART_RE;
          2'd1: add_sel = ADD_PART_RE;
          2'd2: add_sel = first_op ? ADD_ZERO : ADD_PART_IM;
          default: add_sel = ADD_PART_IM;
        endcase
      end
      default: begin  // element-wise
        if (!cfg.cplx) add_sel = ADD_ZERO;
        else unique case (ph)
          2'd1: add_sel = ADD_PART_RE;
          2'd3: add_sel = ADD_PART_IM;
          default: add_sel = ADD_ZERO;
        endcase
      end
    endcase
  end

  always_comb begin
    unique case (add_sel)
      ADD_RES_RE:  addend = res_in.v.re;
      ADD_RES_IM:  addend = res_in.v.im;
      ADD_PART_RE: addend = part.re;
      ADD_PART_IM: addend = part.im;
      default:     addend = '0;
    endcase
  end

  assign sum = prod + addend;

  // last sub-step of one multiply-accumulate
  logic mac_end;
  assign mac_end = act && (!cfg.cplx || ph == 2'd3);

  // result finished this cycle (OS / EW) and its value
  logic   fin;
  res_t   fin_res;
  always_comb begin
    fin         = 1'b0;
    fin_res     = '0;
    fin_res.valid = 1'b1;
    fin_res.first = 1'b1;
    fin_res.last  = 1'b1;
    fin_res.v     = cfg.cplx ? cword_t'{re: part.re, im: sum} : cword_t'{re: sum, im: '0};
    if (cfg.mode == MODE_OS) begin
      fin         = mac_end && inp_in.last;
      fin_res.wr  = inp_in.wr;
      fin_res.tag = inp_in.tag;
    end else if (cfg.mode == MODE_EW) begin
      fin         = mac_end;
      fin_res.wr  = 1'b1;
      fin_res.tag = ew_tag;
    end
  end

  // ---------------------------------------------------------------- registers
  res_t hold;
  logic hold_v;
  logic emit;
  assign emit = !res_in.valid && hold_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      part     <= '0;
      res_out  <= '0;
      hold     <= '0;
      hold_v   <= 1'b0;
      ew_busy  <= 1'b0;
      ew_phase <= '0;
      ew_a     <= '0;
      ew_b     <= '0;
      ew_tag   <= '0;
    end else begin
      // PARTIALS
      if (act) begin
        if (!cfg.cplx)          part.re <= sum;
        else if (ph[1] == 1'b0) part.re <= sum;
        else                    part.im <= sum;
      end

      if (cfg.mode == MODE_WS) begin
        res_out.valid <= mac_end;
        if (mac_end) begin
          res_out.first <= inp_in.first;
          res_out.last  <= inp_in.last;
          res_out.wr    <= inp_in.wr;
          res_out.tag   <= inp_in.tag;
          if (cfg.cplx) res_out.v.im <= sum;
          else          res_out.v    <= cword_t'{re: sum, im: '0};
        end
        // complex: the real part leaves as soon as it is complete (phase 1)
        if (act && cfg.cplx && ph == 2'd1) res_out.v.re <= sum;
        hold_v <= 1'b0;
      end else begin
        // shared result path: traffic from above first, then our own result
        if (res_in.valid)  res_out <= res_in;
        else if (hold_v)   res_out <= hold;
        else               res_out.valid <= 1'b0;
        if (fin) begin
          hold   <= fin_res;
          hold_v <= 1'b1;
        end else if (emit) begin
          hold_v <= 1'b0;
        end
      end

      // element-wise operand capture and phase counter
      if (ew_take) begin
        ew_a     <= dat_in.a;
        ew_b     <= dat_in.b;
        ew_tag   <= dat_in.tag;
        ew_busy  <= 1'b1;
        ew_phase <= '0;
      end else if (ew_busy) begin
        ew_phase <= ew_phase + 1'b1;
        if (mac_end) ew_busy <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- checks
  // a finished result must never overwrite one still waiting
  a_hold_free: assert property (@(posedge clk) disable iff (!rst_n)
                                 (fin && hold_v) |-> emit);
  // a new element-wise pair may only arrive when the previous one is done
  a_ew_free:   assert property (@(posedge clk) disable iff (!rst_n)
                                 ew_take |-> (!ew_busy || mac_end));
  // weight stationary: the partial sum from above belongs to the same result
  a_ws_align:  assert property (@(posedge clk) disable iff (!rst_n)
                                 (cfg.mode == MODE_WS && ROW > 0 && mac_end && !cfg.cplx)
                                 |-> (res_in.valid && res_in.tag == inp_in.tag));
  // output stationary: both operand streams arrive together
  a_os_align:  assert property (@(posedge clk) disable iff (!rst_n)
                                 (cfg.mode == MODE_OS && inp_in.valid) |-> dat_in.valid);

endmodule
