// tb_act_mem: self-checking test of the two-bank activation register file.
//
// Checks reset to zero, random writes into both banks, that the full-bank
// read shows exactly the selected bank, that writes to one bank leave the
// other untouched, and the single-entry read port.
module tb_act_mem;
  localparam int DATA_W = 12, D = 8;

  logic clk = 0, rst_n = 0;
  logic we = 0, wr_bank = 0, rd_bank = 0, pk_bank = 0;
  logic [2:0] wr_addr = 0, pk_addr = 0;
  logic signed [DATA_W-1:0] wr_data = 0;
  logic signed [DATA_W-1:0] rd_vec [D];
  logic signed [DATA_W-1:0] pk_data;

  logic signed [DATA_W-1:0] m [2][D];
  int checks = 0, failures = 0, cycles = 0;

  act_mem #(.DATA_W(DATA_W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int b = 0; b < 2; b++) begin
      rd_bank = b[0];
      for (int a = 0; a < D; a++) begin
        pk_bank = b[0]; pk_addr = 3'(a);
        #1;
        checks += 2;
        if (rd_vec[a] !== m[b][a]) begin
          failures++;
          if (failures < 10) $display("rd bank %0d [%0d] = %0d exp %0d", b, a, rd_vec[a], m[b][a]);
        end
        if (pk_data !== m[b][a]) begin
          failures++;
          if (failures < 10) $display("pk bank %0d [%0d] = %0d exp %0d", b, a, pk_data, m[b][a]);
        end
      end
    end
  endtask

  initial begin
    foreach (m[b, a]) m[b][a] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 3) != 0);
      wr_bank = 1'($urandom);
      wr_addr = 3'($urandom);
      wr_data = DATA_W'($urandom);
      if (we) m[wr_bank][wr_addr] = wr_data;
      @(negedge clk) we = 0;
      if (t % 10 == 0) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
