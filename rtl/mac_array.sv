// mac_array: P parallel multiply-accumulate lanes, C products per lane per clock.
//
// Each clock with en high, every lane i multiplies the C broadcast activities
// act[0..C-1] (C consecutive input columns) by its own C weights w[i][0..C-1]
// and adds the sum of the C products to its accumulator. With `first` high the
// accumulator is instead loaded with bias[i] (sign-extended, or 0 when bias_en
// is low) plus the products, which starts a new dot product without a clear
// cycle. One lane therefore computes one output row of a matrix-vector product,
// C input columns per clock; P lanes compute P rows at once. A column that does
// not exist (end of an odd-length input) is fed as act = 0.
// The paper names MAC units, 8-bit multiplication of 7-bit activities with
// weights, and a design whose parallelism can be varied; the row-parallel,
// activity-broadcast organisation, the column parallelism C and the 24-bit
// accumulator are this design's choices.
// Timing: acc[i] is registered and valid the cycle after the last en.
// Accumulators wrap on overflow; 24 bits hold any sum of up to 512 full-scale
// 8 x 8 products plus a full-scale bias.
module mac_array
  import lmu_pkg::*;
#(
  parameter int unsigned P = DEF_P,
  parameter int unsigned C = DEF_C
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               first,
  input  logic               bias_en,
  input  act_t               act  [C],
  input  logic signed [7:0]  w    [P][C],
  input  bias_t              bias [P],
  output acc_t               acc  [P]
);

  for (genvar i = 0; i < P; i++) begin : g_lane
    acc_t               base;
    acc_t               sum;
    logic signed [15:0] prod [C];

    always_comb begin
      if (first) base = bias_en ? ACC_W'(bias[i]) : '0;
      else       base = acc[i];
      sum = base;
      for (int c = 0; c < int'(C); c++) begin
        prod[c] = act[c] * w[i][c];
        sum     = sum + ACC_W'(prod[c]);
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  acc[i] <= '0;
      else if (en) acc[i] <= sum;
    end
  end

endmodule
