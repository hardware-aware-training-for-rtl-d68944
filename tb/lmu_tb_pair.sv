// lmu_tb_pair: one lmu_kws_top at the given size wired to one lmu_tb_driver
// that does not end the simulation itself; used to run several sizes side by
// side in one testbench.
module lmu_tb_pair
  import lmu_pkg::*;
#(
  parameter int NX = 1, NH = 12, NK = 2, ND = 2, NL = 2, NOUT = 5, P = 8, C = 1,
  parameter bit REQUIRE_WB_WAIT = 1'b0,
  parameter bit REQUIRE_HAZARD  = 1'b1
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int ADEPTH = act_depth(NX, NH, NK, ND, NL, NOUT);
  localparam int WDEPTH = wgt_depth(NX, NH, NK, ND, NL, NOUT, P, C);
  localparam int CDEPTH = coef_depth(NX, NH, NK, ND, NL, NOUT, P, C);
  localparam int BDEPTH = bias_depth(NX, NH, NK, ND, NL, NOUT, P);

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
  logic [clog2_min1(NOUT)-1:0] class_idx;
  act_t class_score;
  logic ev_hazard, ev_wb_wait, ev_sat;

  lmu_kws_top #(.NX(NX), .NH(NH), .NK(NK), .ND(ND), .NL(NL), .NOUT(NOUT), .P(P), .C(C)) dut (.*);

  lmu_tb_driver #(.NX(NX), .NH(NH), .NK(NK), .ND(ND), .NL(NL), .NOUT(NOUT), .P(P), .C(C),
                  .NFRAMES(5), .MAX_FRAME_CYCLES(600),
                  .REQUIRE_WB_WAIT(REQUIRE_WB_WAIT), .REQUIRE_HAZARD(REQUIRE_HAZARD),
                  .STANDALONE(1'b0), .WATCHDOG(300000)) drv (.*);
endmodule
