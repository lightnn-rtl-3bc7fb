// lnn_mult: LightNN equivalent multiply unit.
//
// Replaces a multiplier by K shifts and K-1 additions. The weight is a k-ones
// code, w = sign * (2^-m1 + ... + 2^-mK), so
//     w * x = sign * ((x >> m1) + ... + (x >> mK))
// which is equation (1) of LightNN with the weight exponents all negative
// (right shifts), as in the weight sets of the paper (m = 0..7). For K = 1 the
// unit is a single shifter and a negation; for K = 2 it is two shifters and
// one adder, the "two shifts and an add" of a LightNN-2 neuron.
//
// The shifts are exact: x is first extended by 7 fraction bits, so every
// shift by m <= 7 keeps all bits and the output p equals w * x scaled by 2^7
// with nothing dropped. The paper's floating-point operands are replaced here
// by signed fixed point (the limited-precision variant the paper also
// builds), so the "shift" is a real shifter rather than an exponent add.
//
// Interface: x is a signed DATA_W-bit activation, w a weight code laid out as
// in lightnn_pkg (exponent i at [3*i +: 3], sign at bit 3*K). p is a signed
// PROD_W-bit product with 7 more fraction bits than x. Purely combinational.
module lnn_mult
  import lightnn_pkg::*;
#(
  parameter int unsigned K      = 2,
  parameter int unsigned DATA_W = 12,
  localparam int unsigned WGT_W  = wgt_w(K),
  localparam int unsigned PROD_W = prod_w(DATA_W, K)
) (
  input  logic signed [DATA_W-1:0] x,
  input  logic        [WGT_W-1:0]  w,
  output logic signed [PROD_W-1:0] p
);

  logic signed [PROD_W-1:0] xe;   // x with 7 extra fraction bits
  logic signed [PROD_W-1:0] sum;  // sum of the K shifted copies

  always_comb begin
    xe  = PROD_W'(x) <<< MEXP_MAX;
    sum = '0;
    for (int i = 0; i < int'(K); i++) begin
      sum = sum + (xe >>> w[M_W*i +: M_W]);
    end
    p = w[M_W*K] ? -sum : sum;
  end

endmodule
