// tb_requant: self-checking test of the rescale / saturate / ReLU stage.
// Random accumulators (small, mid-range and full-range), every shift value and
// both ReLU settings are compared with an integer model: floor((acc +
// 2^(shift-1)) / 2^shift), clipped to [-128, 127], then to [0, 127] with ReLU.
module tb_requant;
  import lmu_pkg::*;
  acc_t acc;
  logic [SH_W-1:0] shift;
  logic relu;
  act_t y;
  logic sat;
  int checks = 0, failures = 0;

  requant dut (.*);

  function automatic longint model(longint a, int sh, bit r, output bit s);
    longint v;
    v = a + ((sh > 0) ? (longint'(1) << (sh - 1)) : 0);
    // floor division by 2^sh
    if (v >= 0) v = v / (longint'(1) << sh);
    else        v = -((-v + (longint'(1) << sh) - 1) / (longint'(1) << sh));
    s = 0;
    if (v > 127)  begin v = 127;  s = 1; end
    if (v < -128) begin v = -128; s = 1; end
    if (r && v < 0) begin v = 0; s = 1; end
    return v;
  endfunction

  initial begin
    for (int n = 0; n < 6000; n++) begin
      longint a, e;
      bit es;
      case (n % 3)
        0: a = longint'($urandom_range(511)) - 256;
        1: a = longint'($urandom_range(65535)) - 32768;
        default: a = longint'(acc_t'($urandom));
      endcase
      acc = acc_t'(a);
      shift = SH_W'(n % 32);
      relu = (n / 3) % 2 == 1;
      #1;
      e = model(a, int'(shift), relu, es);
      checks++;
      if (longint'(y) != e || sat != es) begin
        failures++;
        if (failures < 10)
          $display("FAIL acc=%0d sh=%0d relu=%0d: got %0d/%0d expected %0d/%0d",
                   a, shift, relu, y, sat, e, es);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
