// tb_lightnn_top: end-to-end test of the LightNN inference engine.
//
// Two engines with 32-input neuron units run side by side: one with 2-ones
// weights (LightNN-2), one with 1-ones weights (LightNN-1). For each of
// several random networks the host loads weights, biases, the layer table
// and the input, starts both engines and waits for done. An integer
// reference network (products by multiplication, floor division, ReLU /
// sign / identity, saturation) gives every output-layer value and the
// predicted class; the test compares them all and checks the run length,
// sum over layers of (N + 2) + 1 cycles.
//
// Mechanisms counted, each of which must occur: ReLU, sign and identity
// layers, ReLU clipping a negative value, input masking (fan-in below the
// unit's size), activation bank swap (more than one layer), saturation on
// write-back, and back-to-back runs without reset.
module tb_lightnn_top;
  import lightnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 32, R = 128, ML = 4, DATA_W = 12, FRAC_W = 8;

  logic clk = 0, rst_n = 0;
  logic w_we = 0, b_we = 0, x_we = 0, cfg_we = 0, start = 0;
  logic [6:0] w_row = 0, b_row = 0;
  logic [4:0] w_col = 0, x_addr = 0, res_addr = 0;
  logic [7:0] w_code2 = 0;
  logic [3:0] w_code1 = 0;
  logic signed [DATA_W-1:0] b_data = 0, x_data = 0;
  logic [1:0] cfg_idx = 0;
  layer_cfg_t cfg_data = '0;
  logic [2:0] num_layers = 0;

  logic busy[2], done[2], sat_event[2];
  logic [4:0] class_idx[2];
  logic signed [DATA_W-1:0] class_val[2], res_data[2];
  logic [1:0] cur_layer[2];

  lightnn_top #(.K(2), .DATA_W(DATA_W), .FRAC_W(FRAC_W), .FAN_IN(N), .ROWS(R), .MAX_LAYERS(ML)) dut2 (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_code(w_code2), .b_we, .b_row, .b_data,
    .x_we, .x_addr, .x_data, .cfg_we, .cfg_idx, .cfg_data, .num_layers, .start,
    .busy(busy[0]), .done(done[0]), .class_idx(class_idx[0]), .class_val(class_val[0]),
    .res_addr, .res_data(res_data[0]), .cur_layer(cur_layer[0]), .sat_event(sat_event[0]));

  lightnn_top #(.K(1), .DATA_W(DATA_W), .FRAC_W(FRAC_W), .FAN_IN(N), .ROWS(R), .MAX_LAYERS(ML)) dut1 (
    .clk, .rst_n, .w_we, .w_row, .w_col, .w_code(w_code1), .b_we, .b_row, .b_data,
    .x_we, .x_addr, .x_data, .cfg_we, .cfg_idx, .cfg_data, .num_layers, .start,
    .busy(busy[1]), .done(done[1]), .class_idx(class_idx[1]), .class_val(class_val[1]),
    .res_addr, .res_data(res_data[1]), .cur_layer(cur_layer[1]), .sat_event(sat_event[1]));

  int checks = 0, failures = 0, cycles = 0;
  int n_relu = 0, n_sign = 0, n_none = 0, n_clip = 0, n_mask = 0, n_swap = 0, n_sat = 0, n_runs = 0;
  int n_sat_ref = 0;

  // network image
  int wc[2][R][N];       // weight codes for K=2 and K=1
  int bias[R];
  int xin[N];
  int fi[ML], fo[ML], md[ML];

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  always @(posedge clk) if (rst_n && sat_event[0]) n_sat++;

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("t=%0d %s", cycles, msg);
  endtask

  // Reference: run the network for weight set k (0: K=2, 1: K=1).
  task automatic ref_net(input int k, input int nl, output longint outv[N], output int cls);
    longint a[N], nx[N];
    int base;
    bit s;
    base = 0;
    for (int i = 0; i < N; i++) a[i] = xin[i];
    for (int l = 0; l < nl; l++) begin
      for (int j = 0; j < fo[l]; j++) begin
        longint acc;
        acc = longint'(bias[base + j]) * 128;
        for (int i = 0; i < fi[l]; i++) acc += a[i] * wval(wc[k][base + j][i], (k == 0) ? 2 : 1);
        nx[j] = act_ref(acc, md[l], DATA_W, FRAC_W, s);
        if (k == 0) begin
          if (md[l] == 1 && acc < 0) n_clip++;
          if (s) n_sat_ref++;
        end
      end
      for (int j = 0; j < fo[l]; j++) a[j] = nx[j];
      base += fo[l];
    end
    cls = 0;
    for (int j = 0; j < N; j++) outv[j] = 0;
    for (int j = 0; j < fo[nl - 1]; j++) begin
      outv[j] = a[j];
      if (a[j] > a[cls]) cls = j;
    end
  endtask

  // Load and run one network on both engines, then check.
  task automatic run_net(input int nl, input int xmax, input int big_w);
    int base, expect_cycles, t0;
    int done_t[2];
    longint outv[N];
    int cls;
    base = 0;
    expect_cycles = 1;
    // weights, biases
    for (int l = 0; l < nl; l++) begin
      for (int j = 0; j < fo[l]; j++) begin
        bias[base + j] = int'($signed(DATA_W'($urandom))) / 16;
        for (int i = 0; i < N; i++) begin
          wc[0][base + j][i] = rand_code(2);
          wc[1][base + j][i] = rand_code(1);
          if (big_w != 0) begin
            wc[0][base + j][i] &= 'h3f;   // positive weights
            wc[1][base + j][i] &= 'h7;
          end
        end
      end
      base += fo[l];
      expect_cycles += fo[l] + 2;
      if (fi[l] < N) n_mask++;
      if (md[l] == 0) n_none++;
      if (md[l] == 1) n_relu++;
      if (md[l] == 2) n_sign++;
    end
    if (nl > 1) n_swap++;
    for (int r = 0; r < base; r++) begin
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        w_we = 1; w_row = 7'(r); w_col = 5'(i);
        w_code2 = 8'(wc[0][r][i]); w_code1 = 4'(wc[1][r][i]);
        b_we = (i == 0); b_row = 7'(r); b_data = DATA_W'(bias[r]);
      end
    end
    @(negedge clk) begin w_we = 0; b_we = 0; end
    // input vector
    for (int i = 0; i < N; i++) begin
      xin[i] = (big_w != 0) ? xmax : int'($urandom_range(0, xmax));
      @(negedge clk) begin x_we = 1; x_addr = 5'(i); x_data = DATA_W'(xin[i]); end
    end
    @(negedge clk) x_we = 0;
    // layer table
    base = 0;
    for (int l = 0; l < nl; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_idx = 2'(l);
      cfg_data.fan_in = 16'(fi[l]); cfg_data.fan_out = 16'(fo[l]);
      cfg_data.row_base = 16'(base); cfg_data.act = act_mode_e'(md[l]);
      base += fo[l];
    end
    @(negedge clk) begin cfg_we = 0; num_layers = 3'(nl); start = 1; end
    t0 = cycles;
    @(negedge clk) start = 0;
    done_t[0] = -1;
    done_t[1] = -1;
    while (done_t[0] < 0 || done_t[1] < 0) begin
      if (done[0] && done_t[0] < 0) done_t[0] = cycles;
      if (done[1] && done_t[1] < 0) done_t[1] = cycles;
      @(negedge clk);
    end
    n_runs++;
    for (int k = 0; k < 2; k++) begin
      checks++;
      if (done_t[k] - t0 != expect_cycles)
        fail($sformatf("K%0d done after %0d cycles, expected %0d", 2 - k, done_t[k] - t0, expect_cycles));
      ref_net(k, nl, outv, cls);
      for (int j = 0; j < fo[nl - 1]; j++) begin
        res_addr = 5'(j);
        #1;
        checks++;
        if (longint'(res_data[k]) != outv[j])
          fail($sformatf("K%0d output %0d = %0d, expected %0d", 2 - k, j, res_data[k], outv[j]));
      end
      checks++;
      if (int'(class_idx[k]) != cls || longint'(class_val[k]) != outv[cls])
        fail($sformatf("K%0d class %0d (%0d), expected %0d (%0d)", 2 - k, class_idx[k], class_val[k], cls, outv[cls]));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // LightNN-2 / LightNN-1 style: ReLU hidden layers, identity output
    fi = '{32, 20, 12, 0}; fo = '{20, 12, 6, 0}; md = '{1, 1, 0, 0};
    run_net(3, 255, 0);
    // "-bin" style: sign hidden layers, identity output
    fi = '{32, 16, 8, 0}; fo = '{16, 8, 5, 0}; md = '{2, 2, 0, 0};
    run_net(3, 255, 0);
    // large positive weights and inputs: saturation on write-back
    fi = '{32, 10, 0, 0}; fo = '{10, 4, 0, 0}; md = '{1, 0, 0, 0};
    run_net(2, 2047, 1);
    // four layers, full fan-in in every layer, mixed functions
    fi = '{32, 32, 32, 32}; fo = '{32, 32, 32, 16}; md = '{2, 1, 2, 0};
    run_net(4, 511, 0);
    // one layer only
    fi = '{24, 0, 0, 0}; fo = '{10, 0, 0, 0}; md = '{0, 0, 0, 0};
    run_net(1, 255, 0);

    $display("mechanisms: relu=%0d sign=%0d none=%0d clip=%0d mask=%0d swap=%0d sat=%0d runs=%0d",
             n_relu, n_sign, n_none, n_clip, n_mask, n_swap, n_sat, n_runs);
    checks++; if (n_relu == 0) fail("ReLU layer never ran");
    checks++; if (n_sign == 0) fail("sign layer never ran");
    checks++; if (n_none == 0) fail("identity layer never ran");
    checks++; if (n_clip == 0) fail("ReLU never clipped");
    checks++; if (n_mask == 0) fail("input masking never used");
    checks++; if (n_swap == 0) fail("bank swap never happened");
    checks++; if (n_sat == 0 || n_sat != n_sat_ref)
      fail($sformatf("saturation events %0d, reference %0d", n_sat, n_sat_ref));
    checks++; if (n_runs < 2) fail("no back-to-back runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
