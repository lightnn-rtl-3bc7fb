// tb_lnn_activation: self-checking test of the activation unit.
//
// Random and edge accumulators (including values that overflow the 12-bit
// activation range) through all three functions, compared with an integer
// model: floor division by 128, then ReLU / sign (+-256 = +-1.0) / identity,
// then saturation to [-2048, 2047].
module tb_lnn_activation;
  import lightnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int DATA_W = 12, FRAC_W = 8, ACC_W = 32;

  logic signed [ACC_W-1:0]  acc;
  act_mode_e                mode;
  logic signed [DATA_W-1:0] y;
  logic                     sat;

  int checks = 0, failures = 0;
  int nsat = 0;

  lnn_activation #(.DATA_W(DATA_W), .FRAC_W(FRAC_W), .ACC_W(ACC_W)) dut (.*);

  task automatic check(input longint a, input int m);
    bit es;
    longint e;
    acc  = ACC_W'(a);
    mode = act_mode_e'(m);
    #1;
    e = act_ref(a, m, DATA_W, FRAC_W, es);
    checks++;
    if (longint'(y) != e || sat != es) begin
      failures++;
      if (failures < 10) $display("acc=%0d mode=%0d y=%0d sat=%0b exp=%0d/%0b", a, m, y, sat, e, es);
    end
    if (sat) nsat++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint edges[] = '{0, 1, -1, 127, 128, -128, -129, 2047*128, 2047*128+127, 2048*128,
                        -2048*128, -2048*128-1, 64'sd2147483647, -64'sd2147483648};
    for (int m = 0; m < 3; m++) begin
      foreach (edges[i]) check(edges[i], m);
      for (int i = 0; i < 2000; i++) begin
        longint r;
        r = (i % 2) ? longint'($signed($urandom)) : longint'($signed($urandom)) >>> 12;
        check(r, m);
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
