// weight_mem: weight and bias memory of the LightNN engine.
//
// One row per neuron of the whole network (ROWS rows, the rows of a layer
// consecutive). A row holds FAN_IN k-ones weight codes, one per input of the
// neuron, and the neuron's bias. The paper keeps the weights in memory and
// fetches them to the neuron logic; a whole row is read at once here so that
// the parallel neuron unit gets all its weights in one cycle. Weight codes
// take 4 bits for K = 1 and one byte for K = 2, the storage sizes of the
// paper. The row-per-neuron organisation is this design's choice.
//
// Interface and timing:
//   w_we/w_row/w_col/w_code   host writes one weight code per cycle;
//   b_we/b_row/b_data         host writes one bias per cycle;
//   rd_en/rd_row              read request; rd_w (all FAN_IN codes of the row)
//                             and rd_b are valid the cycle after (registered
//                             read) and hold until the next request.
// A write and a read of the same row in one cycle returns the old contents.
module weight_mem
  import lightnn_pkg::*;
#(
  parameter int unsigned K      = 2,
  parameter int unsigned DATA_W = 12,
  parameter int unsigned FAN_IN = 784,
  parameter int unsigned ROWS   = 110,
  localparam int unsigned WGT_W = wgt_w(K),
  localparam int unsigned ROW_W = $clog2(ROWS),
  localparam int unsigned COL_W = $clog2(FAN_IN)
) (
  input  logic                     clk,
  input  logic                     w_we,
  input  logic        [ROW_W-1:0]  w_row,
  input  logic        [COL_W-1:0]  w_col,
  input  logic        [WGT_W-1:0]  w_code,
  input  logic                     b_we,
  input  logic        [ROW_W-1:0]  b_row,
  input  logic signed [DATA_W-1:0] b_data,
  input  logic                     rd_en,
  input  logic        [ROW_W-1:0]  rd_row,
  output logic        [WGT_W-1:0]  rd_w [FAN_IN],
  output logic signed [DATA_W-1:0] rd_b
);

  logic        [WGT_W-1:0]  wmem [ROWS][FAN_IN];
  logic signed [DATA_W-1:0] bmem [ROWS];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_row][w_col] <= w_code;
    if (b_we) bmem[b_row] <= b_data;
    if (rd_en) begin
      rd_w <= wmem[rd_row];
      rd_b <= bmem[rd_row];
    end
  end

endmodule
