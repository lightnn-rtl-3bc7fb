// tb_argmax: self-checking test of the prediction unit.
//
// Streams random groups of output values (with deliberate ties and
// all-negative groups) into the unit, gaps included, and checks after each
// group that the index and value of the first largest entry are reported.
module tb_argmax;
  localparam int DATA_W = 12, IDX_W = 4;

  logic clk = 0, rst_n = 0;
  logic clear = 0, in_valid = 0;
  logic [IDX_W-1:0] in_idx = 0;
  logic signed [DATA_W-1:0] in_val = 0;
  logic [IDX_W-1:0] best_idx;
  logic signed [DATA_W-1:0] best_val;
  logic have;

  int checks = 0, failures = 0, cycles = 0, ties = 0;

  argmax #(.DATA_W(DATA_W), .IDX_W(IDX_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 300; g++) begin
      int n, bi, bv;
      n = $urandom_range(1, 16);
      bi = -1;
      bv = 0;
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      checks++;
      if (have) begin failures++; $display("have after clear"); end
      for (int i = 0; i < n; i++) begin
        int v;
        if (g % 3 == 0) v = $urandom_range(0, 3);              // many ties
        else if (g % 3 == 1) v = -int'($urandom_range(1, 2048)); // all negative
        else v = int'($signed(DATA_W'($urandom)));
        if (bi >= 0 && v == bv) ties++;
        if (bi < 0 || v > bv) begin bi = i; bv = v; end
        @(negedge clk);
        in_valid = 1; in_idx = IDX_W'(i); in_val = DATA_W'(v);
        if ($urandom_range(0, 3) == 0) begin
          @(negedge clk) in_valid = 0;
        end
      end
      @(negedge clk) in_valid = 0;
      checks++;
      if (!have || int'(best_idx) != bi || int'(best_val) != bv) begin
        failures++;
        if (failures < 10) $display("group %0d: idx %0d val %0d exp %0d %0d", g, best_idx, best_val, bi, bv);
      end
    end
    checks++;
    if (ties == 0) begin failures++; $display("no ties tested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
