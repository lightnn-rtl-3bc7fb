// lnn_ctrl: layer and neuron sequencer of the LightNN engine.
//
// Runs a network layer by layer. Within a layer it issues one neuron per
// cycle: it reads the neuron's weight row, the neuron unit computes it the
// next cycle, and the cycle after that the activated result is written back
// into the activation register file. After the last neuron of a layer it
// waits for the two-stage pipeline to drain, swaps the activation banks and
// starts the next layer. After the last layer it pulses done. The paper's
// engine computes "the output for all neurons in that layer" from fetched
// weights and inputs and writes the results back; the one-neuron-per-cycle
// issue, the drain and the layer table are this design's choices.
//
// The layer table (MAX_LAYERS entries of layer_cfg_t) is written by the host
// through cfg_we/cfg_idx/cfg_data while idle; num_layers is sampled at start.
// Layer l reads activation bank l%2 and writes bank (l+1)%2, so the host
// loads the network input into bank 0 and the results end in bank
// num_layers%2 (out_bank).
//
// Timing: start in cycle 0 -> ISSUE from cycle 1. A layer of N neurons takes
// N + 2 cycles; done is high for one cycle, sum over layers of (N + 2) plus
// one cycles after start. Outputs:
//   rd_en/rd_row      weight-row read, cycle t (issue of neuron j);
//   nrn_valid         neuron-unit input valid, cycle t+1;
//   wb_we/wb_addr     write-back of neuron j, cycle t+2, to bank wb_bank;
//   fan_in/act/rd_bank  settings of the current layer, stable within it;
//   am_clear/am_valid argmax clear at start, feed during the last layer.
//
// The assertions below are switched off during reset with the same
// asynchronous rst_n that clears the registers, so lint may report rst_n
// as used both synchronously and asynchronously; that use is only in checks.
module lnn_ctrl
  import lightnn_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 4,
  parameter int unsigned FAN_IN     = 784,
  parameter int unsigned ROWS       = 110,
  localparam int unsigned LIDX_W = $clog2(MAX_LAYERS),
  localparam int unsigned NL_W   = $clog2(MAX_LAYERS + 1),
  localparam int unsigned ROW_W  = $clog2(ROWS),
  localparam int unsigned COL_W  = $clog2(FAN_IN),
  localparam int unsigned CNT_W  = $clog2(FAN_IN + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer table
  input  logic              cfg_we,
  input  logic [LIDX_W-1:0] cfg_idx,
  input  layer_cfg_t        cfg_data,
  input  logic [NL_W-1:0]   num_layers,
  // run control
  input  logic              start,
  output logic              busy,
  output logic              done,
  // weight memory
  output logic              rd_en,
  output logic [ROW_W-1:0]  rd_row,
  // neuron unit and activation
  output logic              nrn_valid,
  output logic [CNT_W-1:0]  fan_in,
  output act_mode_e         act,
  // activation register file
  output logic              rd_bank,
  output logic              wb_we,
  output logic              wb_bank,
  output logic [COL_W-1:0]  wb_addr,
  output logic              out_bank,
  // prediction
  output logic              am_clear,
  output logic              am_valid,
  // status
  output logic [LIDX_W-1:0] layer
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN, S_DONE} state_e;

  state_e      state;
  layer_cfg_t  table_q [MAX_LAYERS];
  layer_cfg_t  cur;
  logic [NL_W-1:0]  nl_q;
  logic [15:0] j;                 // neuron being issued in this layer
  logic        dcnt;              // drain cycle
  logic [1:0]  v_pipe;            // issue valid, delayed 1 and 2 cycles
  logic [COL_W-1:0] idx_d1, idx_d2;
  logic        last_layer;

  assign cur        = table_q[layer];
  assign last_layer = (NL_W'(layer) == nl_q - 1'b1);
  assign busy       = (state == S_ISSUE) || (state == S_DRAIN);
  assign done       = (state == S_DONE);
  assign rd_en      = (state == S_ISSUE);
  assign rd_row     = ROW_W'(cur.row_base + j);
  assign fan_in     = CNT_W'(cur.fan_in);
  assign act        = cur.act;
  assign rd_bank    = layer[0];
  assign wb_bank    = ~layer[0];
  assign out_bank   = nl_q[0];
  assign nrn_valid  = v_pipe[0];
  assign wb_we      = v_pipe[1];
  assign wb_addr    = idx_d2;
  assign am_clear   = (state == S_IDLE) && start;
  assign am_valid   = v_pipe[1] && last_layer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      table_q <= '{default: layer_cfg_t'('0)};
    end else if (cfg_we && !busy) begin
      table_q[cfg_idx] <= cfg_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      nl_q   <= '0;
      layer  <= '0;
      j      <= '0;
      dcnt   <= 1'b0;
      v_pipe <= '0;
      idx_d1 <= '0;
      idx_d2 <= '0;
    end else begin
      v_pipe <= {v_pipe[0], rd_en};
      idx_d1 <= COL_W'(j);
      idx_d2 <= idx_d1;
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state <= S_ISSUE;
            nl_q  <= num_layers;
            layer <= '0;
            j     <= '0;
          end else begin
            state <= S_IDLE;
          end
        end
        S_ISSUE: begin
          if (j == cur.fan_out - 16'd1) begin
            state <= S_DRAIN;
            dcnt  <= 1'b0;
          end else begin
            j <= j + 16'd1;
          end
        end
        S_DRAIN: begin
          dcnt <= 1'b1;
          if (dcnt) begin
            if (last_layer) begin
              state <= S_DONE;
            end else begin
              state <= S_ISSUE;
              layer <= layer + 1'b1;
              j     <= '0;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Rules for the host and the layer table.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (num_layers >= 1 && num_layers <= NL_W'(MAX_LAYERS)))
    else $error("lnn_ctrl: num_layers out of range");
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ISSUE) |-> (cur.fan_in >= 16'd1 && cur.fan_in <= 16'(FAN_IN)
                            && cur.fan_out >= 16'd1 && cur.fan_out <= 16'(FAN_IN)
                            && 32'(cur.row_base) + 32'(cur.fan_out) <= ROWS))
    else $error("lnn_ctrl: layer %0d table entry out of range", layer);
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !cfg_we)
    else $error("lnn_ctrl: layer table written while busy");

endmodule
