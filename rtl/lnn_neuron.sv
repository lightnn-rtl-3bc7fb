// lnn_neuron: one LightNN neuron, built for the largest fan-in of the network.
//
// The neuron of the paper's Figure 1(b): every input x_i is multiplied by its
// k-ones weight in an lnn_mult (shifts and adds, no multiplier), the products
// are summed, and the bias is added. The activation function f(.) follows in
// lnn_activation. As in the paper's pipelined engine, the logic is sized for
// the largest neuron (FAN_IN equivalent multiply units working in parallel)
// and forms one pipeline stage, so a new neuron can enter every cycle.
// Inputs at index fan_in and above are masked, so one neuron unit serves
// layers with fewer inputs (a k-ones weight cannot encode zero).
//
// Timing: in_valid with x_vec, w_vec, bias and fan_in in cycle t gives
// out_valid and acc in cycle t+1 (one register stage). acc is signed, with 7
// more fraction bits than the activations; bias has the activations' format.
// The sum is written as a loop; synthesis builds it as an adder tree.
module lnn_neuron
  import lightnn_pkg::*;
#(
  parameter int unsigned K       = 2,
  parameter int unsigned DATA_W  = 12,
  parameter int unsigned FAN_IN  = 784,
  localparam int unsigned WGT_W  = wgt_w(K),
  localparam int unsigned PROD_W = prod_w(DATA_W, K),
  localparam int unsigned ACC_W  = PROD_W + $clog2(FAN_IN) + 1,
  localparam int unsigned CNT_W  = $clog2(FAN_IN + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] x_vec [FAN_IN],
  input  logic        [WGT_W-1:0]  w_vec [FAN_IN],
  input  logic signed [DATA_W-1:0] bias,
  input  logic        [CNT_W-1:0]  fan_in,
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [PROD_W-1:0] prod [FAN_IN];
  logic signed [ACC_W-1:0]  sum;

  for (genvar i = 0; i < FAN_IN; i++) begin : g_mult
    lnn_mult #(.K(K), .DATA_W(DATA_W)) u_mult (
      .x (x_vec[i]),
      .w (w_vec[i]),
      .p (prod[i])
    );
  end

  always_comb begin
    sum = ACC_W'(bias) <<< MEXP_MAX;
    for (int i = 0; i < int'(FAN_IN); i++) begin
      if (i < int'(fan_in)) sum = sum + ACC_W'(prod[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      acc       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) acc <= sum;
    end
  end

endmodule
