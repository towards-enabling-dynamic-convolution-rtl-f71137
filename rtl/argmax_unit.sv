// argmax_unit: turns the output layer's class scores into a predicted class.
//
// It watches the writes of the last layer (we, idx, score) as they happen and
// keeps the largest score seen since clear and its index; pred is that index.
// A later score must be strictly larger to win, so ties go to the lower class.
// pred is valid the clock after the last score is written. The host reads it
// as the prediction register of the control interface.
module argmax_unit
  import dcnn_pkg::*;
#(
  parameter int N = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       we,
  input  logic [7:0] idx,
  input  data_t      score,
  output logic [7:0] pred
);

  data_t best;
  logic  have;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best <= '0;
      have <= 1'b0;
      pred <= '0;
    end else if (clear) begin
      best <= '0;
      have <= 1'b0;
      pred <= '0;
    end else if (we && int'(idx) < N && (!have || score > best)) begin
      best <= score;
      have <= 1'b1;
      pred <= idx;
    end
  end

endmodule
