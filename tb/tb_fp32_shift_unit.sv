// tb_fp32_shift_unit: checks the single-precision LightNN-1 multiply unit.
//
// Every weight code (sign and m = 0..7) is applied to edge values (zeros,
// the smallest and largest normals, subnormals, infinities, a NaN, values
// whose product falls just below the normal range) and to random words.
// The reference decodes the input into a real number, multiplies it by
// +-2^-m in double precision, and flushes results below the smallest
// normal to a signed zero. A normal result must match the reference value
// exactly; a zero result must be a signed zero with the right sign;
// infinities and NaNs must keep their payload and take the product sign.
module tb_fp32_shift_unit;
  logic [31:0] x, p;
  logic [3:0]  w;
  int checks = 0, failures = 0, steps = 0;

  fp32_shift_unit dut (.x, .w, .p);

  function automatic real pow2(input int n);
    real r;
    r = 1.0;
    for (int i = 0; i < (n < 0 ? -n : n); i++) r = (n < 0) ? r / 2.0 : r * 2.0;
    return r;
  endfunction

  function automatic real to_real(input logic [31:0] b);
    real mag;
    mag = real'({1'b1, b[22:0]}) * pow2(int'(b[30:23]) - 150);
    return b[31] ? -mag : mag;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] xi, input logic [3:0] wi);
    bit  ps;
    int  e, m;
    real ref_v;
    x = xi; w = wi;
    #1;
    steps++;
    checks++;
    ps = xi[31] ^ wi[3];
    e = int'(xi[30:23]);
    m = int'(wi[2:0]);
    if (e == 255) begin
      if (p != {ps, xi[30:0]}) begin
        failures++;
        $display("special x=%h w=%h: p=%h", xi, wi, p);
      end
    end else if (e == 0) begin
      if (p != {ps, 31'd0}) begin
        failures++;
        $display("zero/subnormal x=%h w=%h: p=%h", xi, wi, p);
      end
    end else begin
      ref_v = to_real(xi) / pow2(m);
      if (wi[3]) ref_v = -ref_v;
      if ((ref_v < 0 ? -ref_v : ref_v) < pow2(-126)) begin
        if (p != {ps, 31'd0}) begin
          failures++;
          $display("underflow x=%h w=%h: p=%h", xi, wi, p);
        end
      end else if (p[30:23] == 8'd0 || p[30:23] == 8'hff || to_real(p) != ref_v) begin
        failures++;
        $display("x=%h w=%h: p=%h, expected %f", xi, wi, p, ref_v);
      end
    end
  endtask

  initial begin
    logic [31:0] edges[12];
    edges = '{32'h0000_0000, 32'h8000_0000, 32'h0080_0000, 32'h7f7f_ffff,
              32'h0000_0001, 32'h807f_ffff, 32'h7f80_0000, 32'hff80_0000,
              32'h7fc0_0001, 32'h3f80_0000, 32'h0400_0000, 32'h0380_0000};
    for (int k = 0; k < 16; k++) begin
      foreach (edges[i]) check(edges[i], 4'(k));
      for (int e = 1; e <= 9; e++) check({1'b0, 8'(e), 23'h2a_5a5a}, 4'(k));
    end
    for (int n = 0; n < 4000; n++) check($urandom, 4'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
