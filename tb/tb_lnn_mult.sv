// tb_lnn_mult: self-checking test of the LightNN equivalent multiply unit.
//
// Drives every weight code of a 2-ones unit and of a 1-ones unit with edge
// and random activations and compares the product with an integer
// multiplication: x * sign * (2^(7-m1) + 2^(7-m2)), i.e. w * x scaled by 2^7.
module tb_lnn_mult;
  import lightnn_pkg::*;

  localparam int DATA_W = 12;

  logic signed [DATA_W-1:0] x;
  logic        [7:0]        w2;
  logic        [3:0]        w1;
  logic signed [prod_w(DATA_W, 2)-1:0] p2;
  logic signed [prod_w(DATA_W, 1)-1:0] p1;

  int checks = 0, failures = 0;

  lnn_mult #(.K(2), .DATA_W(DATA_W)) dut2 (.x(x), .w(w2), .p(p2));
  lnn_mult #(.K(1), .DATA_W(DATA_W)) dut1 (.x(x), .w(w1), .p(p1));

  function automatic longint ref2(longint xv, int code);
    longint mag = (longint'(1) << (7 - (code & 7))) + (longint'(1) << (7 - ((code >> 3) & 7)));
    return ((code >> 6) & 1) ? -(xv * mag) : xv * mag;
  endfunction

  function automatic longint ref1(longint xv, int code);
    longint mag = longint'(1) << (7 - (code & 7));
    return ((code >> 3) & 1) ? -(xv * mag) : xv * mag;
  endfunction

  task automatic check_x(input int xv);
    x = DATA_W'(xv);
    for (int c = 0; c < 256; c++) begin
      w2 = 8'(c);
      w1 = 4'(c);
      #1;
      checks++;
      if (longint'(p2) != ref2(xv, c & 8'h7f)) begin
        failures++;
        if (failures < 10) $display("K=2 x=%0d code=%02h p=%0d exp=%0d", xv, c, p2, ref2(xv, c & 8'h7f));
      end
      if (c < 16) begin
        checks++;
        if (longint'(p1) != ref1(xv, c)) begin
          failures++;
          if (failures < 10) $display("K=1 x=%0d code=%0h p=%0d exp=%0d", xv, c, p1, ref1(xv, c));
        end
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_x(0);
    check_x(1);
    check_x(-1);
    check_x(2047);
    check_x(-2048);
    check_x(256);
    check_x(-3);
    for (int i = 0; i < 40; i++) check_x(int'($signed(DATA_W'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
