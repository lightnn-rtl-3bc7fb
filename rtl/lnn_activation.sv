// lnn_activation: activation function f(.) of a LightNN layer.
//
// Takes a neuron's accumulator (7 more fraction bits than an activation) and
// returns a DATA_W-bit activation. Three functions, chosen per layer:
//   ACT_RELU  max(0, a), the activation of LightNN-1 and LightNN-2;
//   ACT_SIGN  +1.0 if a >= 0 else -1.0, the binarized activation of
//             LightNN-1-bin and LightNN-2-bin (sign(0) is taken as +1);
//   ACT_NONE  a itself, for the output layer whose values are compared to
//             make the prediction.
// The accumulator is brought back to the activation format by dropping the 7
// extra fraction bits (truncation toward minus infinity) and saturating to
// the DATA_W range; sat reports that the value was clipped. The paper gives
// the functions; the fixed-point format, the truncation and the saturation
// are this design's choices. FRAC_W sets where +1.0 lies. Combinational.
module lnn_activation
  import lightnn_pkg::*;
#(
  parameter int unsigned DATA_W = 12,
  parameter int unsigned FRAC_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic signed [ACC_W-1:0]  acc,
  input  act_mode_e                mode,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat
);

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((2 ** (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(2 ** (DATA_W - 1));
  localparam logic signed [DATA_W-1:0] ONE = DATA_W'(2 ** FRAC_W);

  logic signed [ACC_W-1:0] a;     // accumulator in the activation format
  logic signed [ACC_W-1:0] r;     // after the activation, before saturation

  always_comb begin
    a   = acc >>> MEXP_MAX;
    r   = a;
    sat = 1'b0;
    y   = '0;
    unique case (mode)
      ACT_RELU: r = (a < 0) ? '0 : a;
      ACT_SIGN: r = (a < 0) ? -ACC_W'(ONE) : ACC_W'(ONE);
      default:  r = a;
    endcase
    if (r > MAXV) begin
      y   = MAXV[DATA_W-1:0];
      sat = 1'b1;
    end else if (r < MINV) begin
      y   = MINV[DATA_W-1:0];
      sat = 1'b1;
    end else begin
      y   = r[DATA_W-1:0];
    end
  end

endmodule
