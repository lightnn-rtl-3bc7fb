// act_mem: activation register file of the LightNN engine.
//
// Two banks of DEPTH activations each. While a layer runs, one bank holds
// its input vector and is read in full, in parallel, by the neuron unit; the
// neuron results are written back, one per cycle, into the other bank, which
// becomes the input of the next layer. The paper writes intermediate results
// back and sizes the register file for the largest neuron; the two-bank
// (ping-pong) arrangement is this design's choice, made so that results can
// be written while the same layer's inputs are still being read.
//
// Interface and timing:
//   we/wr_bank/wr_addr/wr_data  one write per cycle, stored at the clock edge;
//   rd_bank -> rd_vec           the whole bank, combinational (register file);
//   pk_bank/pk_addr -> pk_data  one entry, combinational (result read-out).
module act_mem #(
  parameter int unsigned DATA_W = 12,
  parameter int unsigned DEPTH  = 784,
  localparam int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic                     wr_bank,
  input  logic        [ADDR_W-1:0] wr_addr,
  input  logic signed [DATA_W-1:0] wr_data,
  input  logic                     rd_bank,
  output logic signed [DATA_W-1:0] rd_vec [DEPTH],
  input  logic                     pk_bank,
  input  logic        [ADDR_W-1:0] pk_addr,
  output logic signed [DATA_W-1:0] pk_data
);

  logic signed [DATA_W-1:0] regs [2][DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs <= '{default: '0};
    end else if (we) begin
      regs[wr_bank][wr_addr] <= wr_data;
    end
  end

  assign rd_vec  = regs[rd_bank];
  assign pk_data = regs[pk_bank][pk_addr];

endmodule
