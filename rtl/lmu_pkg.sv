// lmu_pkg: word widths, default network dimensions and the per-frame operation
// schedule shared by the LMU keyword-spotting accelerator and its testbenches.
//
// Arithmetic. Activities are 7-bit values carried in signed 8-bit words, so that
// every product is an 8 x 8 signed multiply; trained weights are 4-bit signed (the
// 4-bit-weight, 7-bit-activation LMU model). These widths follow the paper. The
// fixed LMU memory coefficients (A-bar, B-bar) are held as 8-bit signed values,
// biases as 16-bit values added into a 24-bit accumulator: those widths are this
// design's choice.
//
// Schedule. One frame (one feature vector x_t) is processed as a list of
// matrix-vector operations. For every LMU layer l there is
//   U    u_t  = [e_h e_x] . [h_{t-1} ; x_t]              rows NK
//   M(k) m_t^k = [A-bar B-bar] . [m_{t-1}^k ; u_t^k]      rows ND, one per linear layer k
//   H    h_t  = ReLU([W_x W_m] . [x_t ; m_t] + b)         rows NH
// and after the last layer one output operation, y = W_o . h + b_o (rows NOUT).
// Each operation reads its input vector as two contiguous segments of the state
// memory, so op_desc() only has to say where the segments are. The state memory
// map per layer is H (NH words), U (NK), M bank 0 (NK*ND), M bank 1 (NK*ND); the
// two M banks alternate between frames so that m_t is written while m_{t-1} is
// read. The network sizes (NX, NH, NK, ND, NL) are not given in the paper and are
// chosen here so that the trained parameters come to about 90 k 4-bit weights,
// i.e. close to the 361 kbit LMU-2 model; NOUT = 12 labels is the paper's.
// The array computes P output rows at a time and takes C input columns per
// clock (P*C multipliers); P = 128, C = 2 is this design's choice, sized so that a
// frame fits well inside 20 ms at a 92 kHz clock.
package lmu_pkg;

  localparam int ACT_W  = 8;   // activity word: sign + 7 bits
  localparam int WGT_W  = 4;   // trained weight width
  localparam int COEF_W = 8;   // A-bar / B-bar coefficient width
  localparam int BIAS_W = 16;  // bias width
  localparam int ACC_W  = 24;  // accumulator width
  localparam int SH_W   = 5;   // requantisation shift width
  localparam int AW     = 16;  // width of addresses and counts inside the schedule

  // Default network and array dimensions
  localparam int DEF_NX   = 40;   // features per frame
  localparam int DEF_NH   = 128;  // nonlinear units per LMU layer
  localparam int DEF_NK   = 2;    // linear memory layers per LMU layer
  localparam int DEF_ND   = 64;   // order (dimension) of each linear memory
  localparam int DEF_NL   = 3;    // LMU layers
  localparam int DEF_NOUT = 12;   // output labels
  localparam int DEF_P    = 128;  // MAC lanes (output rows in parallel)
  localparam int DEF_C    = 2;    // input columns consumed per clock by each lane

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [BIAS_W-1:0] bias_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef enum logic [1:0] {PH_U = 2'd0, PH_M = 2'd1, PH_H = 2'd2, PH_OUT = 2'd3} phase_e;

  typedef struct packed {
    phase_e          phase;
    logic [AW-1:0]   rows;      // output rows
    logic [AW-1:0]   base0;     // first input segment
    logic [AW-1:0]   len0;
    logic [AW-1:0]   base1;     // second input segment
    logic [AW-1:0]   len1;
    logic [AW-1:0]   dst;       // first output address
    logic            use_coef;  // weights come from the coefficient memory
    logic            use_bias;
    logic            relu;
  } op_t;

  // ---- state memory map ----
  function automatic int layer_stride(int nh, int nk, int nd);
    return nh + nk + 2 * nk * nd;
  endfunction
  function automatic int h_base(int nx, int nh, int nk, int nd, int l);
    return nx + l * layer_stride(nh, nk, nd);
  endfunction
  function automatic int u_base(int nx, int nh, int nk, int nd, int l);
    return h_base(nx, nh, nk, nd, l) + nh;
  endfunction
  function automatic int m_base(int nx, int nh, int nk, int nd, int l, int bank);
    return u_base(nx, nh, nk, nd, l) + nk + bank * nk * nd;
  endfunction
  function automatic int out_base(int nx, int nh, int nk, int nd, int nl);
    return nx + nl * layer_stride(nh, nk, nd);
  endfunction
  function automatic int act_depth(int nx, int nh, int nk, int nd, int nl, int nout);
    return out_base(nx, nh, nk, nd, nl) + nout;
  endfunction

  function automatic int num_ops(int nk, int nl);
    return nl * (nk + 2) + 1;
  endfunction

  // Operation idx of a frame; bank is the M bank written in this frame.
  function automatic op_t op_desc(int nx, int nh, int nk, int nd, int nl, int nout,
                                  int idx, logic bank);
    op_t o;
    int l, r, xb, xl;
    l = idx / (nk + 2);
    r = idx % (nk + 2);
    o = '0;
    if (l >= nl) begin
      o.phase = PH_OUT;
      o.rows  = AW'(nout);
      o.base0 = AW'(h_base(nx, nh, nk, nd, nl - 1));
      o.len0  = AW'(nh);
      o.dst   = AW'(out_base(nx, nh, nk, nd, nl));
      o.use_bias = 1'b1;
    end else begin
      xb = (l == 0) ? 0 : h_base(nx, nh, nk, nd, l - 1);
      xl = (l == 0) ? nx : nh;
      if (r == 0) begin
        o.phase = PH_U;
        o.rows  = AW'(nk);
        o.base0 = AW'(h_base(nx, nh, nk, nd, l));   // own h_{t-1} first: x_t of a
        o.len0  = AW'(nh);                          // later layer is still being
        o.base1 = AW'(xb);                          // written back at this point
        o.len1  = AW'(xl);
        o.dst   = AW'(u_base(nx, nh, nk, nd, l));
      end else if (r <= nk) begin
        o.phase = PH_M;
        o.rows  = AW'(nd);
        o.base0 = AW'(m_base(nx, nh, nk, nd, l, int'(!bank)) + (r - 1) * nd);
        o.len0  = AW'(nd);
        o.base1 = AW'(u_base(nx, nh, nk, nd, l) + r - 1);
        o.len1  = AW'(1);
        o.dst   = AW'(m_base(nx, nh, nk, nd, l, int'(bank)) + (r - 1) * nd);
        o.use_coef = 1'b1;
      end else begin
        o.phase = PH_H;
        o.rows  = AW'(nh);
        o.base0 = AW'(xb);
        o.len0  = AW'(xl);
        o.base1 = AW'(m_base(nx, nh, nk, nd, l, int'(bank)));
        o.len1  = AW'(nk * nd);
        o.dst   = AW'(h_base(nx, nh, nk, nd, l));
        o.use_bias = 1'b1;
        o.relu     = 1'b1;
      end
    end
    return o;
  endfunction

  function automatic int ceil_div(int a, int b);
    return (a + b - 1) / b;
  endfunction

  // Words of each weight-side memory: one word holds C input columns of P lanes
  // (one lane per output row of a group); operations are stored in schedule order
  // and the last word of a group is padded with zero weights.
  function automatic int wgt_depth(int nx, int nh, int nk, int nd, int nl, int nout, int p,
                                   int c);
    int s;
    op_t o;
    s = 0;
    for (int i = 0; i < num_ops(nk, nl); i++) begin
      o = op_desc(nx, nh, nk, nd, nl, nout, i, 1'b0);
      if (!o.use_coef) s += ceil_div(int'(o.rows), p) * ceil_div(int'(o.len0) + int'(o.len1), c);
    end
    return s;
  endfunction
  function automatic int coef_depth(int nx, int nh, int nk, int nd, int nl, int nout, int p,
                                   int c);
    int s;
    op_t o;
    s = 0;
    for (int i = 0; i < num_ops(nk, nl); i++) begin
      o = op_desc(nx, nh, nk, nd, nl, nout, i, 1'b0);
      if (o.use_coef) s += ceil_div(int'(o.rows), p) * ceil_div(int'(o.len0) + int'(o.len1), c);
    end
    return s;
  endfunction
  function automatic int bias_depth(int nx, int nh, int nk, int nd, int nl, int nout, int p);
    int s;
    op_t o;
    s = 0;
    for (int i = 0; i < num_ops(nk, nl); i++) begin
      o = op_desc(nx, nh, nk, nd, nl, nout, i, 1'b0);
      if (o.use_bias) s += ceil_div(int'(o.rows), p);
    end
    return s;
  endfunction

  function automatic int clog2_min1(int v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
