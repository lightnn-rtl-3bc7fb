// tb_lnn_ctrl: self-checking test of the layer and neuron sequencer.
//
// Programs layer tables (3 layers, then 1 layer, then 4 layers) and runs
// them. Checks, cycle by cycle, that weight rows are requested in order one
// per cycle, that each neuron's write-back comes exactly two cycles after its
// issue with the right address and bank, that the neuron valid sits in
// between, that fan-in, activation and read bank follow the layer, that the
// argmax is fed only during the last layer, and that done comes
// sum(N + 2) + 1 cycles after start.
module tb_lnn_ctrl;
  import lightnn_pkg::*;

  localparam int ML = 4, N = 16, R = 40;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [1:0] cfg_idx = 0;
  layer_cfg_t cfg_data = '0;
  logic [2:0] num_layers = 0;
  logic start = 0;
  logic busy, done, rd_en, nrn_valid, rd_bank, wb_we, wb_bank, out_bank, am_clear, am_valid;
  logic [5:0] rd_row;
  logic [4:0] fan_in;
  act_mode_e act;
  logic [3:0] wb_addr;
  logic [1:0] layer;

  int checks = 0, failures = 0, cycles = 0;
  layer_cfg_t tbl [ML];
  int nl;
  // expected events
  int exp_row[$], exp_layer[$], iss_t[$], iss_j[$], iss_l[$];
  int n_am;

  lnn_ctrl #(.MAX_LAYERS(ML), .FAN_IN(N), .ROWS(R)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("t=%0d %s", cycles, msg);
  endtask

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (rd_en) begin
      int r, l;
      checks++;
      if (exp_row.size() == 0) fail("extra issue");
      else begin
        r = exp_row.pop_front();
        l = exp_layer.pop_front();
        if (int'(rd_row) != r || int'(layer) != l) fail($sformatf("row %0d layer %0d exp %0d %0d", rd_row, layer, r, l));
        if (int'(fan_in) != int'(tbl[l].fan_in) || act != tbl[l].act || rd_bank != l[0])
          fail("layer settings");
        iss_t.push_back(cycles);
        iss_j.push_back(r - int'(tbl[l].row_base));
        iss_l.push_back(l);
      end
    end
    if (wb_we) begin
      int t, j, l;
      checks++;
      if (iss_t.size() == 0) fail("write-back without issue");
      else begin
        t = iss_t.pop_front(); j = iss_j.pop_front(); l = iss_l.pop_front();
        if (cycles != t + 2) fail($sformatf("write-back at %0d, issue at %0d", cycles, t));
        if (int'(wb_addr) != j || wb_bank != !l[0]) fail("write-back address/bank");
        if (am_valid != (l == nl - 1)) fail("argmax feed");
        if (am_valid) n_am++;
      end
    end else if (am_valid) fail("argmax feed without write-back");
    if (nrn_valid) begin
      checks++;
      if (iss_t.size() == 0 || iss_t[0] != cycles - 1) fail("neuron valid not one cycle after issue");
    end
  end

  task automatic run(input int n_layers, input int fo[ML], input int fi[ML], input int md[ML]);
    int base = 0, t0, expect_cycles;
    nl = n_layers;
    expect_cycles = 1;
    for (int l = 0; l < n_layers; l++) begin
      tbl[l].fan_in = 16'(fi[l]); tbl[l].fan_out = 16'(fo[l]);
      tbl[l].row_base = 16'(base); tbl[l].act = act_mode_e'(md[l]);
      for (int j = 0; j < fo[l]; j++) begin exp_row.push_back(base + j); exp_layer.push_back(l); end
      base += fo[l];
      expect_cycles += fo[l] + 2;
      @(negedge clk) begin cfg_we = 1; cfg_idx = 2'(l); cfg_data = tbl[l]; end
    end
    @(negedge clk) begin cfg_we = 0; num_layers = 3'(n_layers); start = 1; end
    t0 = cycles;
    n_am = 0;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cycles - t0 != expect_cycles) fail($sformatf("done after %0d cycles, expected %0d", cycles - t0, expect_cycles));
    checks++;
    if (n_am != fo[n_layers - 1] || exp_row.size() != 0 || iss_t.size() != 0) fail("run incomplete");
    checks++;
    if (out_bank != n_layers[0]) fail("out bank");
    @(negedge clk);
    checks++;
    if (busy || done) fail("not idle after done");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, '{10, 7, 4, 0}, '{16, 10, 7, 0}, '{1, 2, 0, 0});
    run(1, '{5, 0, 0, 0}, '{3, 0, 0, 0}, '{0, 0, 0, 0});
    run(4, '{1, 12, 16, 2}, '{16, 1, 12, 16}, '{2, 1, 2, 0});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
