// argmax: streaming arg-max over the output-layer scores.
//
// The output layer of the network produces one score per label (12 labels:
// ten keywords, silence and unknown). The scores arrive one per clock on
// (valid, idx, score); `clear` starts a new frame. best_idx/best_score track the
// largest score seen since the last clear; on a tie the earlier label is kept.
// The paper gives the labels and the output layer; picking the winner with an
// arg-max is this design's choice. Timing: best_* update on the clock edge after
// each valid score; clear takes priority over a score in the same cycle.
module argmax
  import lmu_pkg::*;
#(
  parameter int unsigned NOUT = DEF_NOUT,
  parameter int unsigned IW   = (NOUT <= 2) ? 1 : $clog2(NOUT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          valid,
  input  logic [IW-1:0] idx,
  input  act_t          score,
  output logic [IW-1:0] best_idx,
  output act_t          best_score,
  output logic          have       // at least one score since the last clear
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_idx   <= '0;
      best_score <= '0;
      have       <= 1'b0;
    end else if (clear) begin
      have <= 1'b0;
    end else if (valid && (!have || score > best_score)) begin
      best_idx   <= idx;
      best_score <= score;
      have       <= 1'b1;
    end
  end

endmodule
