// tb_lightnn_full: the LightNN engine at its default size, one full inference.
//
// Runs the MNIST "1-hidden" multilayer perceptron (784 inputs, 100 hidden
// ReLU neurons, 10 outputs) on the engine with its default parameters
// (2-ones weights, 12-bit activations, a 784-input neuron unit, 110 weight
// rows). The weights are random 2-ones codes and the input a random image
// with pixels in [0, 1/8), small enough that few sums saturate, since only
// the arithmetic is being checked. An integer reference network gives the
// 10 output values and the predicted class. The run must take (100 + 2) + (10 + 2) + 1 = 115 cycles.
// Loading the 79,510 parameters takes about 78,400 host-write cycles.
module tb_lightnn_full;
  import lightnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 784, R = 110, DATA_W = 12, FRAC_W = 8;
  localparam int H = 100, O = 10;

  logic clk = 0, rst_n = 0;
  logic w_we = 0, b_we = 0, x_we = 0, cfg_we = 0, start = 0;
  logic [6:0] w_row = 0, b_row = 0;
  logic [9:0] w_col = 0, x_addr = 0, res_addr = 0;
  logic [7:0] w_code = 0;
  logic signed [DATA_W-1:0] b_data = 0, x_data = 0;
  logic [1:0] cfg_idx = 0;
  layer_cfg_t cfg_data = '0;
  logic [2:0] num_layers = 0;
  logic busy, done, sat_event;
  logic [9:0] class_idx;
  logic signed [DATA_W-1:0] class_val, res_data;
  logic [1:0] cur_layer;

  lightnn_top dut (.*);

  int checks = 0, failures = 0, cycles = 0, n_clip = 0;
  int wc[R][N];
  int bias[R];
  int xin[N];

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint hid[H], outv[O], acc;
    int cls, t0, fi[2], fo[2], md[2], base;
    bit s;
    fi = '{N, H}; fo = '{H, O}; md = '{1, 0};
    for (int r = 0; r < R; r++) begin
      bias[r] = int'($signed(DATA_W'($urandom))) / 16;
      for (int i = 0; i < N; i++) wc[r][i] = rand_code(2);
    end
    for (int i = 0; i < N; i++) xin[i] = int'($urandom_range(0, 31));
    // reference
    for (int j = 0; j < H; j++) begin
      acc = longint'(bias[j]) * 128;
      for (int i = 0; i < N; i++) acc += longint'(xin[i]) * wval(wc[j][i], 2);
      if (acc < 0) n_clip++;
      hid[j] = act_ref(acc, 1, DATA_W, FRAC_W, s);
    end
    cls = 0;
    for (int j = 0; j < O; j++) begin
      acc = longint'(bias[H + j]) * 128;
      for (int i = 0; i < H; i++) acc += hid[i] * wval(wc[H + j][i], 2);
      outv[j] = act_ref(acc, 0, DATA_W, FRAC_W, s);
      if (outv[j] > outv[cls]) cls = j;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    // load weights (only the columns each layer uses) and biases
    for (int r = 0; r < R; r++) begin
      int ncol;
      ncol = (r < H) ? N : H;
      for (int i = 0; i < ncol; i++) begin
        @(negedge clk);
        w_we = 1; w_row = 7'(r); w_col = 10'(i); w_code = 8'(wc[r][i]);
        b_we = (i == 0); b_row = 7'(r); b_data = DATA_W'(bias[r]);
      end
    end
    @(negedge clk) begin w_we = 0; b_we = 0; end
    for (int i = 0; i < N; i++) begin
      @(negedge clk) begin x_we = 1; x_addr = 10'(i); x_data = DATA_W'(xin[i]); end
    end
    @(negedge clk) x_we = 0;
    base = 0;
    for (int l = 0; l < 2; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_idx = 2'(l);
      cfg_data.fan_in = 16'(fi[l]); cfg_data.fan_out = 16'(fo[l]);
      cfg_data.row_base = 16'(base); cfg_data.act = act_mode_e'(md[l]);
      base += fo[l];
    end
    @(negedge clk) begin cfg_we = 0; num_layers = 3'd2; start = 1; end
    t0 = cycles;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cycles - t0 != (H + 2) + (O + 2) + 1) begin
      failures++;
      $display("done after %0d cycles, expected %0d", cycles - t0, (H + 2) + (O + 2) + 1);
    end
    for (int j = 0; j < O; j++) begin
      res_addr = 10'(j);
      #1;
      checks++;
      if (longint'(res_data) != outv[j]) begin
        failures++;
        $display("output %0d = %0d, expected %0d", j, res_data, outv[j]);
      end
    end
    checks++;
    if (int'(class_idx) != cls || longint'(class_val) != outv[cls]) begin
      failures++;
      $display("class %0d (%0d), expected %0d (%0d)", class_idx, class_val, cls, outv[cls]);
    end
    for (int j = 0; j < O; j++) $display("output %0d = %0d", j, outv[j]);
    $display("prediction %0d, %0d of %0d hidden neurons clipped by ReLU", class_idx, n_clip, H);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
