// tb_lnn_neuron: self-checking test of the LightNN neuron unit.
//
// A 16-input 2-ones neuron gets a new random neuron every cycle (inputs,
// weight codes, bias, fan-in from 1 to 16). Each result must appear exactly
// one cycle later and equal bias*128 + sum over i < fan_in of x_i * w_i*128,
// worked out with integer multiplication. A few bubbles check that
// out_valid follows in_valid.
module tb_lnn_neuron;
  import lightnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int K = 2, DATA_W = 12, N = 16;
  localparam int ACC_W = prod_w(DATA_W, K) + $clog2(N) + 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [DATA_W-1:0] x_vec [N];
  logic        [7:0]        w_vec [N];
  logic signed [DATA_W-1:0] bias;
  logic        [4:0]        fan_in;
  logic                     out_valid;
  logic signed [ACC_W-1:0]  acc;

  int checks = 0, failures = 0;
  longint expq[$];
  int cycles = 0;

  lnn_neuron #(.K(K), .DATA_W(DATA_W), .FAN_IN(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check outputs one cycle after the inputs
  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid) begin
        checks++;
        if (expq.size() == 0) begin
          failures++;
          $display("unexpected out_valid");
        end else begin
          longint e;
          e = expq.pop_front();
          if (longint'(acc) != e) begin
            failures++;
            if (failures < 10) $display("acc=%0d exp=%0d", acc, e);
          end
        end
      end
    end
  end

  initial begin
    bias = 0; fan_in = 0;
    foreach (x_vec[i]) begin x_vec[i] = 0; w_vec[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      // output of the previous cycle has been checked at this posedge
      in_valid = (t % 13) != 5;
      fan_in = 5'($urandom_range(1, N));
      bias = DATA_W'($urandom);
      foreach (x_vec[i]) begin
        x_vec[i] = (t % 7 == 0) ? DATA_W'(2047) : DATA_W'($urandom);
        w_vec[i] = 8'(rand_code(K));
      end
      if (in_valid) begin
        longint s;
        s = longint'(bias) * 128;
        for (int i = 0; i < int'(fan_in); i++) s += longint'(x_vec[i]) * wval(w_vec[i], K);
        expq.push_back(s);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("%0d results missing", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
