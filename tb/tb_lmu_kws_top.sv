// tb_lmu_kws_top: end-to-end test of the accelerator at two reduced sizes.
// Configuration A (NX=1, NH=12, NK=2, ND=2, NL=2, NOUT=5, P=8, C=1): hidden layers
// need two groups of lanes, one of them partial, and the first layer's h groups
// are short enough that a group finishes before the previous group's write-back
// (write-back wait). Configuration B (NX=3, NH=8, NK=2, ND=4, NL=3, NOUT=12,
// P=8, C=2: two columns per clock, odd-length inputs padded): h of one layer is read by the next layer and by the output layer while
// it is still being written back (read-hazard stall). Each configuration runs
// five frames against the reference model in lmu_tb_driver; the mechanisms
// each must show are required by the driver's parameters.
module tb_lmu_kws_top;
  import lmu_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic fin_a, fin_b;
  int   chk_a, chk_b, fail_a, fail_b;

  lmu_tb_pair #(.NX(1), .NH(12), .NK(2), .ND(2), .NL(2), .NOUT(5), .P(8), .C(1),
                .REQUIRE_WB_WAIT(1'b1), .REQUIRE_HAZARD(1'b0))
    cfg_a (.clk, .finished(fin_a), .checks(chk_a), .failures(fail_a));

  lmu_tb_pair #(.NX(3), .NH(8), .NK(2), .ND(4), .NL(3), .NOUT(12), .P(8), .C(2),
                .REQUIRE_WB_WAIT(1'b0), .REQUIRE_HAZARD(1'b1))
    cfg_b (.clk, .finished(fin_b), .checks(chk_b), .failures(fail_b));

  initial begin
    wait (fin_a === 1'b1 && fin_b === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", chk_a + chk_b, fail_a + fail_b);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk_a + chk_b, fail_a + fail_b + 1);
    $finish;
  end
endmodule
