// lmu_controller: sequences one frame of the LMU network over the MAC array.
//
// A pulse on `start` processes one feature vector x_t (already written into the
// state memory) through all LMU layers and the output layer. The work is the
// list of matrix-vector operations given by lmu_pkg::op_desc (per layer: u_t,
// then m_t for each linear memory, then h_t; finally the output scores). Each
// operation is cut into groups of P output rows. For one group the controller
// streams the input vector, C elements per clock, from the state memory (C read
// ports) while the weight memory (or, for m_t, the coefficient memory) supplies
// one word of P x C weights per clock; the MAC array accumulates P dot products. Two clocks after
// the last column the P sums are copied into a write-back buffer and the next
// group starts at once. The write-back buffer rescales the sums (requant) and
// writes them into the state memory one per clock, overlapped with the next
// group's accumulation.
//
// Hazard: an operation may read what the previous one is still writing back
// (h of layer l is the input of layer l+1, u feeds m, h feeds the output layer).
// A read whose address is still waiting in the write-back buffer stalls the
// column stream for a clock (ev_hazard). A group whose sums are ready while the
// buffer is still busy waits (ev_wb_wait).
// Weight, coefficient and bias memories are laid out in schedule order, so their
// read addresses are plain counters that restart at every frame. The two M banks
// swap at the end of every frame (`bank` is the bank written next).
//
// Follows the paper: the three LMU equations, ReLU, several linear memories whose
// outputs are concatenated, several LMU layers and a feed-forward output layer,
// state kept across frames. This design's own choices: the schedule, the
// column parallelism C, the memory layout, the overlap of write-back with compute and the hazard stall.
// Timing: busy rises the clock after start; done pulses for one clock when the
// last result of the frame is written.
module lmu_controller
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
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [SH_W-1:0] cfg_shift [4],   // rescale shift per phase (U, M, H, OUT)
  output logic            busy,
  output logic            done,
  output logic            bank,
  // state memory
  output logic            act_re,
  output logic [AAW-1:0]  act_raddr [C],    // C consecutive input columns
  input  act_t            act_rdata [C],
  output logic            act_we,
  output logic [AAW-1:0]  act_waddr,
  output act_t            act_wdata,
  // weight-side memories
  output logic            w_re,
  output logic [WAW-1:0]  w_raddr,
  output logic            c_re,
  output logic [CAW-1:0]  c_raddr,
  output logic            b_re,
  output logic [BAW-1:0]  b_raddr,
  // MAC array
  output logic            mac_en,
  output logic            mac_first,
  output logic            mac_bias_en,
  output logic            mac_use_coef,
  output act_t            mac_act [C],
  input  acc_t            acc [P],
  // output-layer scores
  output logic            out_clear,
  output logic            out_valid,
  output logic [OIW-1:0]  out_idx,
  output act_t            out_score,
  // events
  output logic            ev_hazard,
  output logic            ev_wb_wait,
  output logic            ev_sat
);

  localparam int unsigned NOPS = num_ops(NK, NL);
  localparam int unsigned PIW  = clog2_min1(P);

  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_TAIL, S_LATCH, S_FLUSH} state_e;
  state_e state;

  logic [AW-1:0]  op_idx, grp, col;
  logic [WAW-1:0] w_ptr;
  logic [CAW-1:0] c_ptr;
  logic [BAW-1:0] b_ptr;

  op_t            op;
  logic [AW-1:0]  cols, ngroups, grp_rows;
  logic [AW-1:0]  rd_addr [C];
  logic [C-1:0]   rd_vld;
  logic           hazard, issue, last_col, last_grp, last_op;

  // write-back buffer
  acc_t            wb_acc [P];
  logic            wb_busy;
  logic [AW-1:0]   wb_base, wb_cnt, wb_idx;
  logic [SH_W-1:0] wb_shift;
  logic            wb_relu, wb_out;
  logic [AW-1:0]   wb_addr;
  logic            rq_sat;
  acc_t            wb_sel;

  // column pipeline (memory read latency of one clock)
  logic p1_valid, p1_first, p1_coef, p1_bias;
  logic [C-1:0] p1_vld;

  always_comb begin
    op       = op_desc(int'(NX), int'(NH), int'(NK), int'(ND), int'(NL), int'(NOUT),
                       int'(op_idx), bank);
    cols     = op.len0 + op.len1;
    ngroups  = AW'((32'(op.rows) + P - 1) / P);
    grp_rows = (op.rows - grp * AW'(P) > AW'(P)) ? AW'(P) : op.rows - grp * AW'(P);
    wb_addr  = wb_base + wb_idx;
    hazard   = 1'b0;
    for (int c = 0; c < int'(C); c++) begin
      logic [AW-1:0] cc;
      cc         = col + AW'(c);
      rd_vld[c]  = (cc < cols);
      rd_addr[c] = (cc < op.len0) ? op.base0 + cc : op.base1 + (cc - op.len0);
      if (rd_vld[c] && wb_busy && (rd_addr[c] >= wb_addr) && (rd_addr[c] < wb_base + wb_cnt))
        hazard = 1'b1;
    end
    issue    = (state == S_ISSUE) && !hazard;
    last_col = (32'(col) + C >= 32'(cols));
    last_grp = (grp == ngroups - 1'b1);
    last_op  = (op_idx == AW'(NOPS - 1));
  end

  assign busy      = (state != S_IDLE);
  assign act_re    = issue;
  assign w_re      = issue && !op.use_coef;
  assign w_raddr   = w_ptr;
  assign c_re      = issue && op.use_coef;
  assign c_raddr   = c_ptr;
  assign b_re      = issue && op.use_bias && (col == '0);
  assign b_raddr   = b_ptr;

  assign mac_en       = p1_valid;
  assign mac_first    = p1_first;
  assign mac_bias_en  = p1_bias;
  assign mac_use_coef = p1_coef;
  for (genvar c = 0; c < C; c++) begin : g_col
    assign act_raddr[c] = AAW'(rd_addr[c]);
    assign mac_act[c]   = p1_vld[c] ? act_rdata[c] : '0;   // missing column adds 0
  end

  assign ev_hazard  = (state == S_ISSUE) && hazard;
  assign ev_wb_wait = (state == S_LATCH) && wb_busy;

  requant u_requant (
    .acc   (wb_sel),
    .shift (wb_shift),
    .relu  (wb_relu),
    .y     (act_wdata),
    .sat   (rq_sat)
  );

  assign wb_sel    = wb_acc[PIW'(wb_idx)];
  assign act_we    = wb_busy;
  assign act_waddr = AAW'(wb_addr);
  assign out_valid = wb_busy && wb_out;
  assign out_idx   = OIW'(wb_idx);
  assign out_score = act_wdata;
  assign ev_sat    = wb_busy && rq_sat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_valid <= 1'b0;
      p1_first <= 1'b0;
      p1_coef  <= 1'b0;
      p1_bias  <= 1'b0;
      p1_vld   <= '0;
    end else begin
      p1_valid <= issue;
      p1_first <= issue && (col == '0);
      p1_coef  <= op.use_coef;
      p1_bias  <= op.use_bias;
      p1_vld   <= rd_vld;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op_idx    <= '0;
      grp       <= '0;
      col       <= '0;
      w_ptr     <= '0;
      c_ptr     <= '0;
      b_ptr     <= '0;
      bank      <= 1'b0;
      done      <= 1'b0;
      out_clear <= 1'b0;
      wb_busy   <= 1'b0;
      wb_base   <= '0;
      wb_cnt    <= '0;
      wb_idx    <= '0;
      wb_shift  <= '0;
      wb_relu   <= 1'b0;
      wb_out    <= 1'b0;
      for (int i = 0; i < int'(P); i++) wb_acc[i] <= '0;
    end else begin
      done      <= 1'b0;
      out_clear <= 1'b0;

      // write-back: one result per clock
      if (wb_busy) begin
        wb_idx <= wb_idx + 1'b1;
        if (wb_idx == wb_cnt - 1'b1) wb_busy <= 1'b0;
      end

      unique case (state)
        S_IDLE: if (start) begin
          op_idx    <= '0;
          grp       <= '0;
          col       <= '0;
          w_ptr     <= '0;
          c_ptr     <= '0;
          b_ptr     <= '0;
          out_clear <= 1'b1;
          state     <= S_ISSUE;
        end
        S_ISSUE: if (issue) begin
          if (op.use_coef) c_ptr <= c_ptr + 1'b1;
          else             w_ptr <= w_ptr + 1'b1;
          if (last_col) begin
            col <= '0;
            if (op.use_bias) b_ptr <= b_ptr + 1'b1;
            state <= S_TAIL;
          end else begin
            col <= col + AW'(C);
          end
        end
        S_TAIL: state <= S_LATCH;   // last product is being accumulated
        S_LATCH: if (!wb_busy) begin
          for (int i = 0; i < int'(P); i++) wb_acc[i] <= acc[i];
          wb_busy  <= 1'b1;
          wb_idx   <= '0;
          wb_base  <= op.dst + grp * AW'(P);
          wb_cnt   <= grp_rows;
          wb_shift <= cfg_shift[op.phase];
          wb_relu  <= op.relu;
          wb_out   <= (op.phase == PH_OUT);
          if (!last_grp) begin
            grp   <= grp + 1'b1;
            state <= S_ISSUE;
          end else if (!last_op) begin
            grp    <= '0;
            op_idx <= op_idx + 1'b1;
            state  <= S_ISSUE;
          end else begin
            state <= S_FLUSH;
          end
        end
        S_FLUSH: if (!wb_busy) begin
          done  <= 1'b1;
          bank  <= ~bank;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The column stream never reads a word that is still waiting to be written.
  for (genvar c = 0; c < C; c++) begin : g_raw
    a_no_raw: assert property (@(posedge clk) disable iff (!rst_n)
      (act_re && rd_vld[c]) |-> !(wb_busy && (32'(act_raddr[c]) >= 32'(wb_addr)) &&
                                  (32'(act_raddr[c]) < 32'(wb_base + wb_cnt))));
  end
  // Weight and coefficient pointers stay inside their memories.
  a_w_range: assert property (@(posedge clk) disable iff (!rst_n)
    w_re |-> 32'(w_raddr) < WDEPTH);
  a_c_range: assert property (@(posedge clk) disable iff (!rst_n)
    c_re |-> 32'(c_raddr) < CDEPTH);

endmodule
