// lmu_kws_top: keyword-spotting accelerator for a stacked Legendre Memory Unit
// network with 4-bit weights and 7-bit activities.
//
// Every 20 ms the host writes one feature vector x_t into the state memory and
// pulses `start`. The controller then evaluates, layer by layer,
//   u_t = e_x . x_t + e_h . h_{t-1}          (one scalar per linear memory)
//   m_t = A-bar m_{t-1} + B-bar u_t          (each linear memory)
//   h_t = ReLU(W_x x_t + W_m m_t + b)        (m_t of all memories concatenated)
// and finally the output layer's 12 label scores, on an array of P
// multiply-accumulate lanes that each take C input columns per clock. The network state (h, m) stays in the state memory
// from frame to frame and is never cleared by the hardware. `done` pulses when
// the frame is finished; class_idx is then the label with the highest score.
//
// Memories: state memory (sram_1wnr, 8-bit words, C read ports, map in
// lmu_pkg), and, as sram_1r1w, trained weight memory (P x C x 4-bit words),
// coefficient memory for A-bar / B-bar (P x C x 8-bit words) and bias memory
// (P x 16-bit words). The host loads them
// through the host_* ports, which are honoured only while busy is low; the
// state memory can also be read back (host_act_re, data on the next clock).
// Word layout of the weight-side memories: see lmu_pkg (one word = C input
// columns of a group of P output rows, stored in schedule order; column c,
// lane i at sub-word c*P+i).
//
// cfg_shift[phase] sets the power-of-two rescale applied to the u, m, h and
// output-layer sums. ev_* are one-clock event strobes (read hazard stall,
// write-back wait, saturation). Frame latency in clocks is about the sum over
// all groups of ceil(input columns / C) plus a few clocks per group for
// start-up, write-back waits and stalls: 1139 clocks at the default size
// (C = 2), i.e. 12.4 ms of a 20 ms frame at a 92 kHz clock.
module lmu_kws_top
  import lmu_pkg::*;
#(
  parameter int unsigned NX   = DEF_NX,
  parameter int unsigned NH   = DEF_NH,
  parameter int unsigned NK   = DEF_NK,
  parameter int unsigned ND   = DEF_ND,
  parameter int unsigned NL   = DEF_NL,
  parameter int unsigned NOUT = DEF_NOUT,
  parameter int unsigned P    = DEF_P,
  parameter int unsigned C    = DEF_C,
  localparam int unsigned ADEPTH = act_depth(NX, NH, NK, ND, NL, NOUT),
  localparam int unsigned WDEPTH = wgt_depth(NX, NH, NK, ND, NL, NOUT, P, C),
  localparam int unsigned CDEPTH = coef_depth(NX, NH, NK, ND, NL, NOUT, P, C),
  localparam int unsigned BDEPTH = bias_depth(NX, NH, NK, ND, NL, NOUT, P),
  localparam int unsigned AAW = clog2_min1(ADEPTH),
  localparam int unsigned WAW = clog2_min1(WDEPTH),
  localparam int unsigned CAW = clog2_min1(CDEPTH),
  localparam int unsigned BAW = clog2_min1(BDEPTH),
  localparam int unsigned OIW = clog2_min1(NOUT)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [SH_W-1:0]       cfg_shift [4],
  output logic                  busy,
  output logic                  done,
  output logic                  bank,
  // host access to the state memory
  input  logic                  host_act_we,
  input  logic [AAW-1:0]        host_act_addr,
  input  act_t                  host_act_wdata,
  input  logic                  host_act_re,
  output act_t                  host_act_rdata,
  // host loading of weights, coefficients and biases
  input  logic                  host_w_we,
  input  logic [WAW-1:0]        host_w_addr,
  input  logic [P*C*WGT_W-1:0]  host_w_wdata,
  input  logic                  host_c_we,
  input  logic [CAW-1:0]        host_c_addr,
  input  logic [P*C*COEF_W-1:0] host_c_wdata,
  input  logic                  host_b_we,
  input  logic [BAW-1:0]        host_b_addr,
  input  logic [P*BIAS_W-1:0]   host_b_wdata,
  // result
  output logic                  class_valid,
  output logic [OIW-1:0]        class_idx,
  output act_t                  class_score,
  // events
  output logic                  ev_hazard,
  output logic                  ev_wb_wait,
  output logic                  ev_sat
);

  // controller <-> memories
  logic           c_act_re, c_act_we;
  logic [AAW-1:0] c_act_raddr [C];
  logic [AAW-1:0] c_act_waddr;
  logic [AAW-1:0] act_raddr   [C];
  act_t           c_act_wdata;
  act_t           act_rdata   [C];
  logic [ACT_W-1:0] act_rdata_raw [C];
  logic           w_re, c_re, b_re;
  logic [WAW-1:0] w_raddr;
  logic [CAW-1:0] c_raddr;
  logic [BAW-1:0] b_raddr;
  logic [P*C*WGT_W-1:0]  w_word;
  logic [P*C*COEF_W-1:0] c_word;
  logic [P*BIAS_W-1:0] b_word;

  // controller <-> MAC array
  logic               mac_en, mac_first, mac_bias_en, mac_use_coef;
  act_t               mac_act  [C];
  logic signed [7:0]  mac_w    [P][C];
  bias_t              mac_bias [P];
  acc_t               acc      [P];

  logic               out_clear, out_valid;
  logic [OIW-1:0]     out_idx;
  act_t               out_score;
  logic               frame_seen;

  lmu_controller #(
    .NX(NX), .NH(NH), .NK(NK), .ND(ND), .NL(NL), .NOUT(NOUT), .P(P), .C(C)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg_shift, .busy, .done, .bank,
    .act_re(c_act_re), .act_raddr(c_act_raddr), .act_rdata(act_rdata),
    .act_we(c_act_we), .act_waddr(c_act_waddr), .act_wdata(c_act_wdata),
    .w_re, .w_raddr, .c_re, .c_raddr, .b_re, .b_raddr,
    .mac_en, .mac_first, .mac_bias_en, .mac_use_coef, .mac_act, .acc,
    .out_clear, .out_valid, .out_idx, .out_score,
    .ev_hazard, .ev_wb_wait, .ev_sat
  );

  // state memory: the controller owns it while busy, the host otherwise (the
  // host uses read port 0)
  always_comb begin
    for (int c = 0; c < int'(C); c++) act_raddr[c] = busy ? c_act_raddr[c] : host_act_addr;
  end

  sram_1wnr #(.DW(ACT_W), .DEPTH(ADEPTH), .NR(C)) u_act_mem (
    .clk,
    .we    (busy ? c_act_we    : host_act_we),
    .waddr (busy ? c_act_waddr : host_act_addr),
    .wdata (busy ? c_act_wdata : host_act_wdata),
    .re    (busy ? c_act_re    : host_act_re),
    .raddr (act_raddr),
    .rdata (act_rdata_raw)
  );
  always_comb begin
    for (int c = 0; c < int'(C); c++) act_rdata[c] = act_t'(act_rdata_raw[c]);
  end
  assign host_act_rdata = act_rdata[0];

  sram_1r1w #(.DW(P*C*WGT_W), .DEPTH(WDEPTH)) u_wgt_mem (
    .clk, .we(host_w_we && !busy), .waddr(host_w_addr), .wdata(host_w_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_word)
  );
  sram_1r1w #(.DW(P*C*COEF_W), .DEPTH(CDEPTH)) u_coef_mem (
    .clk, .we(host_c_we && !busy), .waddr(host_c_addr), .wdata(host_c_wdata),
    .re(c_re), .raddr(c_raddr), .rdata(c_word)
  );
  sram_1r1w #(.DW(P*BIAS_W), .DEPTH(BDEPTH)) u_bias_mem (
    .clk, .we(host_b_we && !busy), .waddr(host_b_addr), .wdata(host_b_wdata),
    .re(b_re), .raddr(b_raddr), .rdata(b_word)
  );

  // lane operands: column c, lane i sits at sub-word c*P+i of a memory word;
  // 4-bit trained weights are sign-extended to the 8-bit multiplier
  always_comb begin
    for (int i = 0; i < int'(P); i++) begin
      for (int c = 0; c < int'(C); c++)
        mac_w[i][c] = mac_use_coef ? c_word[(c*P + i)*COEF_W +: COEF_W]
                                   : 8'(signed'(w_word[(c*P + i)*WGT_W +: WGT_W]));
      mac_bias[i] = b_word[i*BIAS_W +: BIAS_W];
    end
  end

  mac_array #(.P(P), .C(C)) u_mac (
    .clk, .rst_n, .en(mac_en), .first(mac_first), .bias_en(mac_bias_en),
    .act(mac_act), .w(mac_w), .bias(mac_bias), .acc
  );

  argmax #(.NOUT(NOUT)) u_argmax (
    .clk, .rst_n, .clear(out_clear), .valid(out_valid), .idx(out_idx),
    .score(out_score), .best_idx(class_idx), .best_score(class_score),
    .have(frame_seen)
  );

  assign class_valid = frame_seen && !busy;

  // Host rule: memories are loaded only while the accelerator is idle (writes
  // during a frame are ignored by the gating above and flagged here).
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(host_act_we || host_w_we || host_c_we || host_b_we));
  // start is honoured only when idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule
