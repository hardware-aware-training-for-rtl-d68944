// tb_lmu_kws_full: the accelerator at its default size (40 features, three LMU
// layers of 128 units with two 64-dimensional linear memories each, 12 labels,
// 128 MAC lanes of two columns each). A random network of that size is loaded and 50 frames (one
// second of audio at the 20 ms frame rate) are run and compared in full with the reference model in lmu_tb_driver. Each
// frame must finish within 1231 clocks: 13.38 ms at a 92 kHz clock, the
// per-frame throughput of the lowest-power design point reported for this
// accelerator (a 20 ms frame is 1840 clocks at that rate).
module tb_lmu_kws_full;
  import lmu_pkg::*;
  localparam int ADEPTH = act_depth(DEF_NX, DEF_NH, DEF_NK, DEF_ND, DEF_NL, DEF_NOUT);
  localparam int WDEPTH = wgt_depth(DEF_NX, DEF_NH, DEF_NK, DEF_ND, DEF_NL, DEF_NOUT, DEF_P, DEF_C);
  localparam int CDEPTH = coef_depth(DEF_NX, DEF_NH, DEF_NK, DEF_ND, DEF_NL, DEF_NOUT, DEF_P, DEF_C);
  localparam int BDEPTH = bias_depth(DEF_NX, DEF_NH, DEF_NK, DEF_ND, DEF_NL, DEF_NOUT, DEF_P);
  localparam int P = DEF_P, C = DEF_C;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, bank;
  logic [SH_W-1:0] cfg_shift [4];
  logic host_act_we, host_act_re;
  logic [clog2_min1(ADEPTH)-1:0] host_act_addr;
  act_t host_act_wdata, host_act_rdata;
  logic host_w_we, host_c_we, host_b_we;
  logic [clog2_min1(WDEPTH)-1:0] host_w_addr;
  logic [clog2_min1(CDEPTH)-1:0] host_c_addr;
  logic [clog2_min1(BDEPTH)-1:0] host_b_addr;
  logic [P*C*WGT_W-1:0]  host_w_wdata;
  logic [P*C*COEF_W-1:0] host_c_wdata;
  logic [P*BIAS_W-1:0] host_b_wdata;
  logic class_valid;
  logic [clog2_min1(DEF_NOUT)-1:0] class_idx;
  act_t class_score;
  logic ev_hazard, ev_wb_wait, ev_sat;
  logic finished;
  int   checks, failures;

  lmu_kws_top dut (.*);

  lmu_tb_driver #(.NFRAMES(50), .MAX_FRAME_CYCLES(1231), .WATCHDOG(1000000)) drv (.*);
endmodule
