// fp32_shift_unit: LightNN-1 multiply unit for single-precision operands.
//
// With 1-ones weights w = +-2^-m, multiplying a single-precision value x by
// w needs no multiplier: the sign bit is flipped when w is negative and m is
// subtracted from the 8-bit exponent. The mantissa passes through untouched,
// so the result is exact whenever it stays a normal number. This follows
// the observation that for floating-point operands the shift becomes an
// integer operation on the exponent. The special cases are this design's
// choices: a zero or subnormal input, or a result whose exponent would drop
// to zero or below, gives a signed zero (flush to zero); infinities and NaNs
// keep their exponent and mantissa and only take the sign.
//
// Interface: x is an IEEE 754 single-precision word, w a 4-bit weight code
// ([3] sign, [2:0] m, m = 0..7), p the product word. Purely combinational.
module fp32_shift_unit
  import lightnn_pkg::*;
(
  input  logic [31:0]      x,
  input  logic [M_W:0]     w,
  output logic [31:0]      p
);

  logic       s;
  logic [7:0] e;
  logic [2:0] m;

  always_comb begin
    s = x[31] ^ w[M_W];
    e = x[30:23];
    m = w[M_W-1:0];
    if (e == 8'hff) begin
      p = {s, x[30:0]};                       // infinity or NaN
    end else if (e <= {5'd0, m}) begin
      p = {s, 31'd0};                         // zero, subnormal or underflow
    end else begin
      p = {s, e - {5'd0, m}, x[22:0]};
    end
  end

endmodule
