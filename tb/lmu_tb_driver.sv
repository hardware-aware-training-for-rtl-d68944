// lmu_tb_driver: stimulus, reference model and checker for lmu_kws_top.
//
// Connects to every port of the accelerator (its outputs are this module's
// inputs). It draws a random network (4-bit weights, 8-bit A-bar/B-bar
// coefficients, 16-bit biases), loads it through the host ports in the
// schedule-order word layout (C columns of P lanes per word), clears the state memory once, and then runs
// NFRAMES frames of random 8-bit features. After every frame it reads the whole
// state memory back and compares u, m (the bank written in that frame), h and
// the output scores with its own integer model of the LMU equations, and
// checks the winning label and the frame's cycle count.
// The model is written from the equations alone: its own memory map, loops over
// rows and columns, wrap of sums to 24 bits, round/saturate/ReLU.
// It also counts the mechanisms of the design and fails if one never happened:
// read-hazard stalls and write-back waits (when required by parameter), saturation,
// ReLU clipping, M bank swaps, multi-group operations and state carried across
// frames. It ends the simulation with the TB_RESULT line.
module lmu_tb_driver
  import lmu_pkg::*;
#(
  parameter int NX = DEF_NX, NH = DEF_NH, NK = DEF_NK, ND = DEF_ND,
  parameter int NL = DEF_NL, NOUT = DEF_NOUT, P = DEF_P, C = DEF_C,
  parameter int NFRAMES = 3,
  parameter int MAX_FRAME_CYCLES = 2000,   // real-time budget checked per frame
  parameter bit REQUIRE_WB_WAIT = 1'b0,
  parameter bit REQUIRE_HAZARD  = 1'b1,
  parameter bit STANDALONE = 1'b1,         // print TB_RESULT and end the simulation
  parameter int WATCHDOG = 2000000,
  localparam int ADEPTH = act_depth(NX, NH, NK, ND, NL, NOUT),
  localparam int WDEPTH = wgt_depth(NX, NH, NK, ND, NL, NOUT, P, C),
  localparam int CDEPTH = coef_depth(NX, NH, NK, ND, NL, NOUT, P, C),
  localparam int BDEPTH = bias_depth(NX, NH, NK, ND, NL, NOUT, P),
  localparam int AAW = clog2_min1(ADEPTH),
  localparam int WAW = clog2_min1(WDEPTH),
  localparam int CAW = clog2_min1(CDEPTH),
  localparam int BAW = clog2_min1(BDEPTH),
  localparam int OIW = clog2_min1(NOUT)
) (
  input  logic                 clk,
  output logic                 rst_n,
  output logic                 start,
  output logic [SH_W-1:0]      cfg_shift [4],
  input  logic                 busy,
  input  logic                 done,
  input  logic                 bank,
  output logic                 host_act_we,
  output logic [AAW-1:0]       host_act_addr,
  output act_t                 host_act_wdata,
  output logic                 host_act_re,
  input  act_t                 host_act_rdata,
  output logic                 host_w_we,
  output logic [WAW-1:0]       host_w_addr,
  output logic [P*C*WGT_W-1:0] host_w_wdata,
  output logic                 host_c_we,
  output logic [CAW-1:0]       host_c_addr,
  output logic [P*C*COEF_W-1:0] host_c_wdata,
  output logic                 host_b_we,
  output logic [BAW-1:0]       host_b_addr,
  output logic [P*BIAS_W-1:0]  host_b_wdata,
  input  logic                 class_valid,
  input  logic [OIW-1:0]       class_idx,
  input  act_t                 class_score,
  input  logic                 ev_hazard,
  input  logic                 ev_wb_wait,
  input  logic                 ev_sat,
  // summary for a testbench that runs several drivers
  output logic                 finished,
  output int                   checks,
  output int                   failures
);

  localparam int XM = (NX > NH) ? NX : NH;
  localparam int SH_U = 5, SH_M = 7, SH_H = 5, SH_O = 5;

  // ---- network ----
  int wu [NL][NK][XM + NH];         // [e_x e_h] rows
  int ca [NL][NK][ND][ND];          // A-bar
  int cb [NL][NK][ND];              // B-bar
  int wh [NL][NH][XM + NK * ND];    // [W_x W_m] rows
  int bh [NL][NH];
  int wo [NOUT][NH];
  int bo [NOUT];

  // ---- model state ----
  int xin [NX];
  int hs  [NL][NH];                 // h_{t-1} -> h_t
  int ms  [NL][NK][ND];             // m_{t-1} -> m_t
  int us  [NL][NK];
  int ys  [NOUT];

  int n_hazard = 0, n_wb_wait = 0, n_sat = 0, n_relu = 0, n_bank_swap = 0;
  int n_state_carry = 0, n_multi_group = 0;
  longint cyc = 0;

  // ---- own memory map ----
  function automatic int xlen(int l); return (l == 0) ? NX : NH; endfunction
  function automatic int a_h(int l); return NX + l * (NH + NK + 2 * NK * ND); endfunction
  function automatic int a_u(int l); return a_h(l) + NH; endfunction
  function automatic int a_m(int l, int b); return a_u(l) + NK + b * NK * ND; endfunction
  function automatic int a_out(); return NX + NL * (NH + NK + 2 * NK * ND); endfunction

  function automatic int rq(longint s, int sh, bit relu);
    longint v;
    v = longint'(acc_t'(s));                       // 24-bit accumulator wraps
    v = v + ((sh > 0) ? (longint'(1) << (sh - 1)) : 0);
    v = v >>> sh;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    if (relu && v < 0) v = 0;
    return int'(v);
  endfunction

  function automatic int wrand4(); return int'($urandom_range(15)) - 8; endfunction
  function automatic int wrand8(); return int'($urandom_range(255)) - 128; endfunction

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_hazard)  n_hazard  <= n_hazard + 1;
    if (ev_wb_wait) n_wb_wait <= n_wb_wait + 1;
    if (ev_sat)     n_sat     <= n_sat + 1;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---- loading, in schedule order ----
  int wp, cp, bp;

  task automatic put_w(int rows, int cols, int l, int kind);
    // kind 0: u rows of layer l, 2: h rows of layer l, 3: output layer
    for (int g = 0; g < (rows + P - 1) / P; g++) begin
      for (int bc = 0; bc < 2; bc++) ;
      if (kind != 0) begin
        for (int i = 0; i < P; i++) begin
          int r;
          r = g * P + i;
          host_b_wdata[i*BIAS_W +: BIAS_W] = '0;
          if (r < rows) host_b_wdata[i*BIAS_W +: BIAS_W] =
              BIAS_W'((kind == 2) ? bh[l][r] : bo[r]);
        end
        host_b_we = 1'b1; host_b_addr = BAW'(bp); bp++;
        tick();
        host_b_we = 1'b0;
      end
      for (int wc = 0; wc < (cols + C - 1) / C; wc++) begin
        for (int cc = 0; cc < C; cc++)
          for (int i = 0; i < P; i++) begin
            int r, v, c;
            r = g * P + i;
            c = wc * C + cc;
            v = 0;
            if (r < rows && c < cols)
              // u rows take h_{t-1} first, then x_t
              v = (kind == 0) ? wu[l][r][(c < NH) ? xlen(l) + c : c - NH]
                : (kind == 2) ? wh[l][r][c] : wo[r][c];
            host_w_wdata[(cc*P + i)*WGT_W +: WGT_W] = WGT_W'(v);
          end
        host_w_we = 1'b1; host_w_addr = WAW'(wp); wp++;
        tick();
      end
      host_w_we = 1'b0;
    end
  endtask

  task automatic put_c(int l, int k);
    for (int g = 0; g < (ND + P - 1) / P; g++)
      for (int wc = 0; wc < (ND + 1 + C - 1) / C; wc++) begin
        for (int cc = 0; cc < C; cc++)
          for (int i = 0; i < P; i++) begin
            int r, v, c;
            r = g * P + i;
            c = wc * C + cc;
            v = 0;
            if (r < ND && c <= ND) v = (c < ND) ? ca[l][k][r][c] : cb[l][k][r];
            host_c_wdata[(cc*P + i)*COEF_W +: COEF_W] = COEF_W'(v);
          end
        host_c_we = 1'b1; host_c_addr = CAW'(cp); cp++;
        tick();
        host_c_we = 1'b0;
      end
  endtask

  task automatic read_act(int a, output int v);
    host_act_re = 1'b1; host_act_addr = AAW'(a);
    tick();
    host_act_re = 1'b0;
    v = int'(host_act_rdata);
  endtask

  // ---- model of one frame ----
  task automatic model_frame();
    int x [XM];
    int hprev [NH];
    for (int l = 0; l < NL; l++) begin
      for (int c = 0; c < xlen(l); c++) x[c] = (l == 0) ? xin[c] : hs[l-1][c];
      for (int n = 0; n < NH; n++) hprev[n] = hs[l][n];
      for (int k = 0; k < NK; k++) begin
        longint s;
        s = 0;
        for (int c = 0; c < xlen(l); c++) s += longint'(wu[l][k][c]) * x[c];
        for (int n = 0; n < NH; n++) s += longint'(wu[l][k][xlen(l) + n]) * hprev[n];
        us[l][k] = rq(s, SH_U, 1'b0);
      end
      for (int k = 0; k < NK; k++) begin
        int mold [ND];
        for (int j = 0; j < ND; j++) mold[j] = ms[l][k][j];
        for (int i = 0; i < ND; i++) begin
          longint s;
          s = longint'(cb[l][k][i]) * us[l][k];
          for (int j = 0; j < ND; j++) s += longint'(ca[l][k][i][j]) * mold[j];
          ms[l][k][i] = rq(s, SH_M, 1'b0);
        end
      end
      for (int n = 0; n < NH; n++) begin
        longint s;
        s = longint'(bh[l][n]);
        for (int c = 0; c < xlen(l); c++) s += longint'(wh[l][n][c]) * x[c];
        for (int k = 0; k < NK; k++)
          for (int j = 0; j < ND; j++)
            s += longint'(wh[l][n][xlen(l) + k * ND + j]) * ms[l][k][j];
        hs[l][n] = rq(s, SH_H, 1'b1);
        if (s + (1 <<< (SH_H - 1)) < 0) n_relu++;
      end
    end
    for (int o = 0; o < NOUT; o++) begin
      longint s;
      s = longint'(bo[o]);
      for (int n = 0; n < NH; n++) s += longint'(wo[o][n]) * hs[NL-1][n];
      ys[o] = rq(s, SH_O, 1'b0);
    end
  endtask

  // ---- main ----
  initial begin
    checks = 0; failures = 0; finished = 1'b0;
    rst_n = 1'b0; start = 1'b0;
    cfg_shift[0] = SH_W'(SH_U); cfg_shift[1] = SH_W'(SH_M);
    cfg_shift[2] = SH_W'(SH_H); cfg_shift[3] = SH_W'(SH_O);
    host_act_we = 1'b0; host_act_re = 1'b0; host_act_addr = '0; host_act_wdata = '0;
    host_w_we = 1'b0; host_w_addr = '0; host_w_wdata = '0;
    host_c_we = 1'b0; host_c_addr = '0; host_c_wdata = '0;
    host_b_we = 1'b0; host_b_addr = '0; host_b_wdata = '0;

    // draw the network
    for (int l = 0; l < NL; l++) begin
      for (int k = 0; k < NK; k++) begin
        for (int c = 0; c < XM + NH; c++) wu[l][k][c] = wrand4();
        for (int i = 0; i < ND; i++) begin
          cb[l][k][i] = wrand8();
          for (int j = 0; j < ND; j++) ca[l][k][i][j] = wrand8();
        end
      end
      for (int n = 0; n < NH; n++) begin
        bh[l][n] = int'($urandom_range(1600)) - 800;
        for (int c = 0; c < XM + NK * ND; c++) wh[l][n][c] = wrand4();
      end
    end
    for (int o = 0; o < NOUT; o++) begin
      bo[o] = int'($urandom_range(1600)) - 800;
      for (int n = 0; n < NH; n++) wo[o][n] = wrand4();
    end
    for (int l = 0; l < NL; l++) begin
      for (int n = 0; n < NH; n++) hs[l][n] = 0;
      for (int k = 0; k < NK; k++) for (int i = 0; i < ND; i++) ms[l][k][i] = 0;
    end

    repeat (3) tick();
    rst_n = 1'b1;
    tick();

    // load weights in schedule order
    wp = 0; cp = 0; bp = 0;
    for (int l = 0; l < NL; l++) begin
      put_w(NK, xlen(l) + NH, l, 0);
      for (int k = 0; k < NK; k++) put_c(l, k);
      put_w(NH, xlen(l) + NK * ND, l, 2);
      if (NH > P) n_multi_group++;
    end
    put_w(NOUT, NH, 0, 3);
    chk(wp == WDEPTH && cp == CDEPTH && bp == BDEPTH, "memory sizes match the schedule");

    // clear the state memory once (power-up)
    for (int a = 0; a < ADEPTH; a++) begin
      host_act_we = 1'b1; host_act_addr = AAW'(a); host_act_wdata = '0;
      tick();
    end
    host_act_we = 1'b0;

    for (int f = 0; f < NFRAMES; f++) begin
      longint t0, t1;
      int v, best;
      logic bank_before;
      for (int c = 0; c < NX; c++) begin
        xin[c] = wrand8();
        host_act_we = 1'b1; host_act_addr = AAW'(c); host_act_wdata = act_t'(xin[c]);
        tick();
      end
      host_act_we = 1'b0;
      bank_before = bank;
      chk(bank_before == f[0], "M bank follows frame parity");
      start = 1'b1; t0 = cyc;
      tick();
      start = 1'b0;
      while (!done) tick();
      t1 = cyc;
      tick();
      if (bank != bank_before) n_bank_swap++;
      $display("frame %0d: %0d cycles", f, t1 - t0);
      chk(t1 - t0 <= longint'(MAX_FRAME_CYCLES), "frame fits its real-time cycle budget");
      model_frame();
      if (f > 0) n_state_carry++;
      // compare every stored vector
      for (int l = 0; l < NL; l++) begin
        for (int k = 0; k < NK; k++) begin
          read_act(a_u(l) + k, v);
          chk(v == us[l][k], $sformatf("f%0d u[%0d][%0d] %0d vs %0d", f, l, k, v, us[l][k]));
          for (int i = 0; i < ND; i++) begin
            read_act(a_m(l, f % 2) + k * ND + i, v);
            chk(v == ms[l][k][i], $sformatf("f%0d m[%0d][%0d][%0d] %0d vs %0d", f, l, k, i, v, ms[l][k][i]));
          end
        end
        for (int n = 0; n < NH; n++) begin
          read_act(a_h(l) + n, v);
          chk(v == hs[l][n], $sformatf("f%0d h[%0d][%0d] %0d vs %0d", f, l, n, v, hs[l][n]));
        end
      end
      best = 0;
      for (int o = 0; o < NOUT; o++) begin
        read_act(a_out() + o, v);
        chk(v == ys[o], $sformatf("f%0d y[%0d] %0d vs %0d", f, o, v, ys[o]));
        if (ys[o] > ys[best]) best = o;
      end
      chk(class_valid && int'(class_idx) == best && int'(class_score) == ys[best],
          $sformatf("f%0d class %0d vs %0d", f, class_idx, best));
    end

    $display("mechanisms: hazard_stall=%0d wb_wait=%0d saturate=%0d relu_clip=%0d bank_swap=%0d state_carry=%0d multi_group=%0d",
             n_hazard, n_wb_wait, n_sat, n_relu, n_bank_swap, n_state_carry, n_multi_group);
    if (REQUIRE_HAZARD) chk(n_hazard > 0, "read-hazard stall happened");
    if (REQUIRE_WB_WAIT) chk(n_wb_wait > 0, "write-back wait happened");
    chk(n_sat > 0, "saturation happened");
    chk(n_relu > 0, "ReLU clipping happened");
    chk(NFRAMES < 2 || n_bank_swap == NFRAMES, "M banks swapped every frame");
    chk(NFRAMES < 2 || n_state_carry > 0, "state carried across frames");
    if (NH > P) chk(n_multi_group > 0, "multi-group operations ran");
    finished = 1'b1;
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    if (!STANDALONE) wait (0);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
