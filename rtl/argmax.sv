// argmax: prediction of the LightNN engine.
//
// In deployment the output neuron with the largest value is the predicted
// class. The output-layer values arrive one per cycle (in_valid, in_idx,
// in_val) as the neuron pipeline writes them back; this unit keeps the
// largest value seen since the last clear and its index. On a tie the first
// (lowest-indexed, earliest) value wins; that rule is this design's choice.
//
// Timing: clear in a cycle empties the unit (the first value after it is
// always taken); best_idx/best_val change the cycle after an accepted value.
// clear and in_valid must not be high together.
//
// The assertions below are switched off during reset with the same
// asynchronous rst_n that clears the registers, so lint may report rst_n
// as used both synchronously and asynchronously; that use is only in checks.
module argmax #(
  parameter int unsigned DATA_W = 12,
  parameter int unsigned IDX_W  = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     in_valid,
  input  logic        [IDX_W-1:0]  in_idx,
  input  logic signed [DATA_W-1:0] in_val,
  output logic        [IDX_W-1:0]  best_idx,
  output logic signed [DATA_W-1:0] best_val,
  output logic                     have
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have     <= 1'b0;
      best_idx <= '0;
      best_val <= '0;
    end else if (clear) begin
      have     <= 1'b0;
      best_idx <= '0;
      best_val <= '0;
    end else if (in_valid && (!have || in_val > best_val)) begin
      have     <= 1'b1;
      best_idx <= in_idx;
      best_val <= in_val;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(clear && in_valid))
    else $error("argmax: clear and in_valid together");

endmodule
