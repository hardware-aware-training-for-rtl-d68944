// requant: turn a 24-bit accumulator into an 8-bit activity word.
//
// The accumulator is divided by 2^shift with rounding (add 2^(shift-1), then an
// arithmetic right shift), saturated to the signed 8-bit range [-128, 127] and,
// when relu is set, clipped below at 0, which leaves the 7-bit range [0, 127].
// The ReLU and the 7-bit activities are the paper's; rescaling by a power of two
// with round-half-up and saturation is this design's choice (the paper mentions
// dividers among the components but not how results are rescaled).
// Purely combinational.
module requant
  import lmu_pkg::*;
(
  input  acc_t            acc,
  input  logic [SH_W-1:0] shift,
  input  logic            relu,
  output act_t            y,
  output logic            sat      // the value was clipped (saturation or ReLU)
);

  // wide enough that any shift up to 2^SH_W - 1 neither overflows nor loses sign
  localparam int RW = ACC_W + (1 << SH_W);
  logic signed [RW-1:0] rounded;
  logic signed [RW-1:0] shifted;

  always_comb begin
    rounded = RW'(acc);
    if (shift != '0) rounded = rounded + (RW'(1) <<< (shift - 1'b1));
    shifted = rounded >>> shift;
    sat = 1'b0;
    if (shifted > 127) begin
      y = 8'sd127;
      sat = 1'b1;
    end else if (shifted < -128) begin
      y = -8'sd128;
      sat = 1'b1;
    end else begin
      y = act_t'(shifted);
    end
    if (relu && y < 0) begin
      y = '0;
      sat = 1'b1;
    end
  end

endmodule
