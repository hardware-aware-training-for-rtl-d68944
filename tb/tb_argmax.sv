// tb_argmax: self-checking test of the streaming arg-max.
// Streams of 12 random scores (with frequent ties and gaps between scores) are
// compared with the first index of the largest score; `have` must be low right
// after clear and high after the first score.
module tb_argmax;
  import lmu_pkg::*;
  localparam int NOUT = 12, IW = 4;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, valid = 1'b0;
  logic [IW-1:0] idx = '0;
  act_t score = '0;
  logic [IW-1:0] best_idx;
  act_t best_score;
  logic have;
  int checks = 0, failures = 0;

  argmax #(.NOUT(NOUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 300; f++) begin
      int bi, bs;
      @(negedge clk) clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      checks++;
      if (have) begin failures++; $display("FAIL have after clear"); end
      bi = -1; bs = 0;
      for (int i = 0; i < NOUT; i++) begin
        if ($urandom_range(3) == 0) @(negedge clk);   // idle gap
        valid = 1'b1; idx = IW'(i);
        score = (f % 2 == 0) ? act_t'($urandom_range(7)) - 4 : act_t'($urandom);
        if (bi < 0 || int'(score) > bs) begin bi = i; bs = int'(score); end
        @(negedge clk) valid = 1'b0;
      end
      checks++;
      if (!have || int'(best_idx) != bi || int'(best_score) != bs) begin
        failures++;
        $display("FAIL frame %0d: got %0d/%0d expected %0d/%0d", f, best_idx, best_score, bi, bs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
