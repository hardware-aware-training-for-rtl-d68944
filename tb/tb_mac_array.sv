// tb_mac_array: self-checking test of the P-lane multiply-accumulate array
// with C = 3 columns per clock. Random dot products of random length are fed
// with random bias/first/bias_en control; a plain integer model of each lane
// (start value bias or 0, then the sum of all act*w, wrapped to 24 bits) is
// compared with every lane's accumulator after each clock of products.
module tb_mac_array;
  import lmu_pkg::*;
  localparam int P = 6, C = 3;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, first = 1'b0, bias_en = 1'b0;
  act_t act [C];
  logic signed [7:0] w [P][C];
  bias_t bias [P];
  acc_t acc [P];
  longint model [P];
  int checks = 0, failures = 0;

  mac_array #(.P(P), .C(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < P; i++) begin
      for (int c = 0; c < C; c++) w[i][c] = '0;
      bias[i] = '0;
    end
    for (int c = 0; c < C; c++) act[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < 60; v++) begin
      int len;
      logic be;
      len = $urandom_range(40, 1);
      be  = $urandom_range(1) == 1;
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        en = 1'b1; first = (c == 0); bias_en = be;
        for (int k = 0; k < C; k++) act[k] = act_t'($urandom);
        for (int i = 0; i < P; i++) begin
          bias[i] = bias_t'($urandom);
          if (c == 0) model[i] = be ? longint'(bias[i]) : 0;
          for (int k = 0; k < C; k++) begin
            w[i][k] = 8'($urandom);
            model[i] += longint'(act[k]) * longint'(w[i][k]);
          end
        end
        @(negedge clk);
        en = 1'b0;
        for (int i = 0; i < P; i++) begin
          checks++;
          if (acc[i] !== acc_t'(model[i])) begin
            failures++;
            $display("FAIL lane %0d: got %0d expected %0d", i, acc[i], acc_t'(model[i]));
          end
        end
      end
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
