// lightnn_top: LightNN inference engine.
//
// Classifies one input vector with a fully connected LightNN whose weights
// are k-ones values (K = 2: +-(2^-m1 + 2^-m2); K = 1: +-2^-m; m = 0..7), so
// that every multiplication is done by shifts and adds. Following the
// paper's pipelined engine, one neuron unit sized for the largest fan-in is
// built; the layers are computed one after the other, one neuron per cycle,
// with weights fetched from memory and the results written back for the next
// layer. The output neuron with the largest value is the prediction.
//
// Blocks: weight_mem (weight and bias rows) -> lnn_neuron (FAN_IN
// equivalent multiply units, adder tree, bias) -> lnn_activation (ReLU, sign
// or identity; saturation) -> act_mem (two-bank activation register file)
// and argmax; lnn_ctrl sequences them. The default sizes hold the paper's
// MNIST "1-hidden" network (784 inputs, 100 hidden neurons, 10 outputs,
// 110 weight rows) at the 12-bit precision of the paper's limited-precision
// implementation; the activation format (8 fraction bits) is this design's
// choice.
//
// Use: with the engine idle, the host writes weight codes (w_*), biases
// (b_*), the input vector (x_* into bank 0), the layer table (cfg_*) and
// sets num_layers; then pulses start. busy is high while the network runs;
// done pulses for one cycle when the prediction class_idx/class_val is
// ready. The output-layer values can then be read through res_addr/res_data;
// cur_layer shows the layer being computed and sat_event marks a write-back
// that was saturated.
// A layer of N neurons takes N + 2 cycles; done comes
// sum(N_l + 2) + 1 cycles after start.
//
// The assertions below are switched off during reset with the same
// asynchronous rst_n that clears the registers, so lint may report rst_n
// as used both synchronously and asynchronously; that use is only in checks.
module lightnn_top
  import lightnn_pkg::*;
#(
  parameter int unsigned K          = 2,
  parameter int unsigned DATA_W     = 12,
  parameter int unsigned FRAC_W     = 8,
  parameter int unsigned FAN_IN     = 784,
  parameter int unsigned ROWS       = 110,
  parameter int unsigned MAX_LAYERS = 4,
  localparam int unsigned WGT_W  = wgt_w(K),
  localparam int unsigned PROD_W = prod_w(DATA_W, K),
  localparam int unsigned ACC_W  = PROD_W + $clog2(FAN_IN) + 1,
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned COL_W  = $clog2(FAN_IN),
  localparam int unsigned CNT_W  = $clog2(FAN_IN + 1),
  localparam int unsigned LIDX_W = $clog2(MAX_LAYERS),
  localparam int unsigned NL_W   = $clog2(MAX_LAYERS + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight and bias loading
  input  logic                     w_we,
  input  logic        [ROW_W-1:0]  w_row,
  input  logic        [COL_W-1:0]  w_col,
  input  logic        [WGT_W-1:0]  w_code,
  input  logic                     b_we,
  input  logic        [ROW_W-1:0]  b_row,
  input  logic signed [DATA_W-1:0] b_data,
  // input vector loading (bank 0 of the activation register file)
  input  logic                     x_we,
  input  logic        [COL_W-1:0]  x_addr,
  input  logic signed [DATA_W-1:0] x_data,
  // layer table
  input  logic                     cfg_we,
  input  logic        [LIDX_W-1:0] cfg_idx,
  input  layer_cfg_t               cfg_data,
  input  logic        [NL_W-1:0]   num_layers,
  // run control and results
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic        [COL_W-1:0]  class_idx,
  output logic signed [DATA_W-1:0] class_val,
  input  logic        [COL_W-1:0]  res_addr,
  output logic signed [DATA_W-1:0] res_data,
  output logic        [LIDX_W-1:0] cur_layer,
  output logic                     sat_event
);

  // controller
  logic              rd_en;
  logic [ROW_W-1:0]  rd_row;
  logic              nrn_valid;
  logic [CNT_W-1:0]  fan_in;
  act_mode_e         act;
  logic              rd_bank, wb_we, wb_bank, out_bank;
  logic [COL_W-1:0]  wb_addr;
  logic              am_clear, am_valid;

  // datapath
  logic        [WGT_W-1:0]  row_w [FAN_IN];
  logic signed [DATA_W-1:0] row_b;
  logic signed [DATA_W-1:0] x_vec [FAN_IN];
  logic                     acc_valid;
  logic signed [ACC_W-1:0]  acc;
  logic signed [DATA_W-1:0] y;
  logic                     sat;
  logic                     am_have;

  // activation register file write port: engine while busy, host otherwise
  logic                     a_we, a_bank;
  logic        [COL_W-1:0]  a_addr;
  logic signed [DATA_W-1:0] a_data;

  lnn_ctrl #(
    .MAX_LAYERS(MAX_LAYERS), .FAN_IN(FAN_IN), .ROWS(ROWS)
  ) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_idx, .cfg_data, .num_layers,
    .start, .busy, .done,
    .rd_en, .rd_row,
    .nrn_valid, .fan_in, .act,
    .rd_bank, .wb_we, .wb_bank, .wb_addr, .out_bank,
    .am_clear, .am_valid,
    .layer  (cur_layer)
  );

  weight_mem #(
    .K(K), .DATA_W(DATA_W), .FAN_IN(FAN_IN), .ROWS(ROWS)
  ) u_wmem (
    .clk,
    .w_we   (w_we && !busy), .w_row, .w_col, .w_code,
    .b_we   (b_we && !busy), .b_row, .b_data,
    .rd_en, .rd_row,
    .rd_w   (row_w),
    .rd_b   (row_b)
  );

  lnn_neuron #(
    .K(K), .DATA_W(DATA_W), .FAN_IN(FAN_IN)
  ) u_neuron (
    .clk, .rst_n,
    .in_valid  (nrn_valid),
    .x_vec,
    .w_vec     (row_w),
    .bias      (row_b),
    .fan_in,
    .out_valid (acc_valid),
    .acc
  );

  lnn_activation #(
    .DATA_W(DATA_W), .FRAC_W(FRAC_W), .ACC_W(ACC_W)
  ) u_act (
    .acc, .mode(act), .y, .sat
  );

  always_comb begin
    if (busy) begin
      a_we   = wb_we;
      a_bank = wb_bank;
      a_addr = wb_addr;
      a_data = y;
    end else begin
      a_we   = x_we;
      a_bank = 1'b0;
      a_addr = x_addr;
      a_data = x_data;
    end
  end

  act_mem #(
    .DATA_W(DATA_W), .DEPTH(FAN_IN)
  ) u_amem (
    .clk, .rst_n,
    .we      (a_we),
    .wr_bank (a_bank),
    .wr_addr (a_addr),
    .wr_data (a_data),
    .rd_bank,
    .rd_vec  (x_vec),
    .pk_bank (out_bank),
    .pk_addr (res_addr),
    .pk_data (res_data)
  );

  argmax #(
    .DATA_W(DATA_W), .IDX_W(COL_W)
  ) u_argmax (
    .clk, .rst_n,
    .clear    (am_clear),
    .in_valid (am_valid),
    .in_idx   (wb_addr),
    .in_val   (y),
    .best_idx (class_idx),
    .best_val (class_val),
    .have     (am_have)
  );

  assign sat_event = wb_we && sat;

  // The write-back stage of the controller and the neuron's result line up.
  assert property (@(posedge clk) disable iff (!rst_n) wb_we == acc_valid)
    else $error("lightnn_top: write-back out of step with the neuron unit");
  assert property (@(posedge clk) disable iff (!rst_n) done |-> am_have)
    else $error("lightnn_top: done without a prediction");

endmodule
