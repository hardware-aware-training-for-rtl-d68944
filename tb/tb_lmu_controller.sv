// tb_lmu_controller: self-checking test of the frame sequencer on its own.
// The state memory is a plain array with one clock of read latency and the MAC
// array is replaced by fixed accumulator values (lane i holds 4*(i+1)), so with
// every rescale shift at 2 the word written for lane i must be i+1. From its own
// copy of the memory map the testbench lists, per frame, every address the
// controller must write (u, m in the current bank, h per layer, then the
// output scores) in order, and the number of state, weight, coefficient and
// bias reads (C = 2 input columns per read), and checks all of them, the output-score stream, the done pulse,
// the M bank swap and the frame's cycle count against the number of columns.
module tb_lmu_controller;
  import lmu_pkg::*;
  localparam int NX = 3, NH = 10, NK = 2, ND = 3, NL = 2, NOUT = 4, P = 4, C = 2;
  localparam int ADEPTH = act_depth(NX, NH, NK, ND, NL, NOUT);
  localparam int WDEPTH = wgt_depth(NX, NH, NK, ND, NL, NOUT, P, C);
  localparam int CDEPTH = coef_depth(NX, NH, NK, ND, NL, NOUT, P, C);
  localparam int BDEPTH = bias_depth(NX, NH, NK, ND, NL, NOUT, P);
  localparam int AAW = clog2_min1(ADEPTH), WAW = clog2_min1(WDEPTH);
  localparam int CAW = clog2_min1(CDEPTH), BAW = clog2_min1(BDEPTH), OIW = clog2_min1(NOUT);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  always #5 clk = ~clk;

  logic [SH_W-1:0] cfg_shift [4];
  logic busy, done, bank;
  logic act_re, act_we, w_re, c_re, b_re;
  logic [AAW-1:0] act_raddr [C];
  logic [AAW-1:0] act_waddr;
  act_t act_rdata [C];
  act_t act_wdata;
  logic [WAW-1:0] w_raddr;
  logic [CAW-1:0] c_raddr;
  logic [BAW-1:0] b_raddr;
  logic mac_en, mac_first, mac_bias_en, mac_use_coef;
  act_t mac_act [C];
  acc_t acc [P];
  logic out_clear, out_valid;
  logic [OIW-1:0] out_idx;
  act_t out_score;
  logic ev_hazard, ev_wb_wait, ev_sat;

  lmu_controller #(.NX(NX), .NH(NH), .NK(NK), .ND(ND), .NL(NL), .NOUT(NOUT), .P(P), .C(C)) dut (.*);

  int checks = 0, failures = 0;
  act_t mem [ADEPTH];
  int exp_w [$];
  int n_act_re, n_w_re, n_c_re, n_b_re, n_out, n_first;

  always_ff @(posedge clk) begin
    if (act_re) for (int c = 0; c < C; c++) act_rdata[c] <= mem[act_raddr[c]];
    if (act_we) mem[act_waddr] <= act_wdata;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int a_h(int l); return NX + l * (NH + NK + 2 * NK * ND); endfunction
  function automatic int a_u(int l); return a_h(l) + NH; endfunction
  function automatic int a_m(int l, int b); return a_u(l) + NK + b * NK * ND; endfunction
  function automatic int xl(int l); return (l == 0) ? NX : NH; endfunction
  function automatic int grps(int r); return (r + P - 1) / P; endfunction
  function automatic int wds(int n); return (n + C - 1) / C; endfunction

  // monitor
  always @(posedge clk) if (rst_n && busy) begin
    if (act_re) begin
      n_act_re++;
    end
    if (w_re) n_w_re++;
    if (c_re) n_c_re++;
    if (b_re) n_b_re++;
    if (mac_en && mac_first) n_first++;
    if (act_we) begin
      int e, lane;
      e = (exp_w.size() > 0) ? exp_w.pop_front() : -1;
      chk(int'(act_waddr) == e, $sformatf("write address %0d expected %0d", act_waddr, e));
      lane = int'(act_wdata) - 1;
      chk(lane >= 0 && lane < P, $sformatf("write data %0d", act_wdata));
    end
    if (out_valid) begin
      chk(int'(out_idx) == n_out && int'(out_score) == (n_out % P) + 1,
          $sformatf("score %0d: idx %0d value %0d", n_out, out_idx, out_score));
      n_out++;
    end
  end

  initial begin
    for (int i = 0; i < P; i++) acc[i] = acc_t'(4 * (i + 1));
    for (int i = 0; i < 4; i++) cfg_shift[i] = SH_W'(2);
    for (int a = 0; a < ADEPTH; a++) mem[a] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 3; f++) begin
      int cols_total, ngroups, cyc, ew, ec, eb;
      exp_w.delete();
      n_act_re = 0; n_w_re = 0; n_c_re = 0; n_b_re = 0; n_out = 0; n_first = 0;
      cols_total = 0; ngroups = 0; ew = 0; ec = 0; eb = 0;
      for (int l = 0; l < NL; l++) begin
        for (int k = 0; k < NK; k++) exp_w.push_back(a_u(l) + k);
        cols_total += grps(NK) * wds(xl(l) + NH); ew += grps(NK) * wds(xl(l) + NH); ngroups += grps(NK);
        for (int k = 0; k < NK; k++) begin
          for (int i = 0; i < ND; i++) exp_w.push_back(a_m(l, f % 2) + k * ND + i);
          cols_total += grps(ND) * wds(ND + 1); ec += grps(ND) * wds(ND + 1); ngroups += grps(ND);
        end
        for (int n = 0; n < NH; n++) exp_w.push_back(a_h(l) + n);
        cols_total += grps(NH) * wds(xl(l) + NK * ND); ew += grps(NH) * wds(xl(l) + NK * ND);
        ngroups += grps(NH); eb += grps(NH);
      end
      for (int o = 0; o < NOUT; o++) exp_w.push_back(a_h(NL) + o);
      cols_total += grps(NOUT) * wds(NH); ew += grps(NOUT) * wds(NH); ngroups += grps(NOUT); eb += grps(NOUT);

      chk(bank == f[0], "bank before frame");
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      chk(exp_w.size() == 0, $sformatf("%0d writes missing", exp_w.size()));
      chk(n_act_re == cols_total, $sformatf("state reads %0d expected %0d", n_act_re, cols_total));
      chk(n_w_re == ew && n_c_re == ec && n_b_re == eb,
          $sformatf("w/c/b reads %0d/%0d/%0d expected %0d/%0d/%0d", n_w_re, n_c_re, n_b_re, ew, ec, eb));
      chk(n_first == ngroups, $sformatf("groups %0d expected %0d", n_first, ngroups));
      chk(n_out == NOUT, "all output scores streamed");
      chk(bank == !f[0], "bank swapped");
      chk(!busy, "idle after done");
      chk(cyc >= cols_total && cyc <= cols_total + 3 * ngroups + P + 40,
          $sformatf("frame took %0d cycles for %0d column reads", cyc, cols_total));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
