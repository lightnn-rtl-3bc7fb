// tb_weight_mem: self-checking test of the weight and bias memory.
//
// Fills a 6-row, 8-column memory with random codes and biases, then reads
// rows in random order and checks that the whole row and the bias appear the
// cycle after the request and hold while rd_en is low. Also checks that a
// read of a row being written in the same cycle returns the old contents.
module tb_weight_mem;
  import lightnn_pkg::*;

  localparam int K = 2, DATA_W = 12, N = 8, R = 6;

  logic clk = 0;
  logic w_we = 0, b_we = 0, rd_en = 0;
  logic [2:0] w_row, b_row, rd_row;
  logic [2:0] w_col;
  logic [7:0] w_code;
  logic signed [DATA_W-1:0] b_data;
  logic [7:0] rd_w [N];
  logic signed [DATA_W-1:0] rd_b;

  logic [7:0] mw [R][N];
  logic signed [DATA_W-1:0] mb [R];
  int checks = 0, failures = 0, cycles = 0;

  weight_mem #(.K(K), .DATA_W(DATA_W), .FAN_IN(N), .ROWS(R)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row(input int r);
    checks++;
    if (rd_b !== mb[r]) begin
      failures++;
      $display("row %0d bias %0d exp %0d", r, rd_b, mb[r]);
    end
    for (int c = 0; c < N; c++) begin
      checks++;
      if (rd_w[c] !== mw[r][c]) begin
        failures++;
        if (failures < 10) $display("row %0d col %0d %02h exp %02h", r, c, rd_w[c], mw[r][c]);
      end
    end
  endtask

  initial begin
    // fill
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        w_we = 1; w_row = 3'(r); w_col = 3'(c); w_code = 8'($urandom_range(0, 127));
        mw[r][c] = w_code;
        b_we = (c == 0); b_row = 3'(r); b_data = DATA_W'($urandom);
        if (c == 0) mb[r] = b_data;
      end
    end
    @(negedge clk) begin w_we = 0; b_we = 0; end
    // random reads with a hold check
    for (int t = 0; t < 60; t++) begin
      int r = $urandom_range(0, R - 1);
      @(negedge clk) begin rd_en = 1; rd_row = 3'(r); end
      @(negedge clk) rd_en = 0;
      check_row(r);
      rd_row = 3'((r + 1) % R);
      @(negedge clk);
      check_row(r);   // held while rd_en is low
    end
    // read during write of the same row returns the old word
    @(negedge clk) begin
      rd_en = 1; rd_row = 3'(2);
      w_we = 1; w_row = 3'(2); w_col = 3'(0); w_code = ~mw[2][0] & 8'h7f;
    end
    @(negedge clk) begin rd_en = 0; w_we = 0; end
    check_row(2);
    mw[2][0] = w_code;
    @(negedge clk) begin rd_en = 1; rd_row = 3'(2); end
    @(negedge clk) rd_en = 0;
    check_row(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
