// lightnn_pkg: types and constants shared by the LightNN inference engine.
//
// A LightNN weight is a "k-ones" value: sign * (2^-m1 + ... + 2^-mK) with every
// exponent m in 0..7, so each exponent takes 3 bits. A weight code holds the
// sign bit above the K exponent fields: exponent i sits at bits [3*i +: 3] and
// the sign at bit 3*K. A 1-ones weight therefore needs 4 bits and a 2-ones
// weight 7 bits, stored in one byte (bit 7 unused). The 3-bit exponent field
// and the one-byte storage of a 2-ones weight follow the paper; the order of
// the fields inside the code is this design's choice.
//
// Activations are signed two's-complement fixed point. Products are kept
// exact by appending MEXP_MAX (7) fraction bits before the right shifts, so a
// product or an accumulator carries 7 more fraction bits than an activation.
package lightnn_pkg;

  // Width of one exponent field and the largest right shift it encodes.
  localparam int unsigned M_W      = 3;
  localparam int unsigned MEXP_MAX = 7;

  // Width of a stored weight code for a K-ones approximation.
  function automatic int unsigned wgt_w(input int unsigned k);
    return (k == 1) ? 4 : 8 * ((M_W * k + 1 + 7) / 8);
  endfunction

  // Width of one exact product x * w for DATA_W-bit activations: 7 extra
  // fraction bits, growth for the sum of K terms, one bit for the negation.
  function automatic int unsigned prod_w(input int unsigned data_w, input int unsigned k);
    return data_w + MEXP_MAX + $clog2(k) + 1;
  endfunction

  // Activation function of a layer. ReLU is used by LightNN-1/-2, the sign
  // function (+1/-1 outputs) by the "-bin" models, identity for the output
  // layer whose raw values feed the prediction.
  typedef enum logic [1:0] {
    ACT_NONE = 2'd0,
    ACT_RELU = 2'd1,
    ACT_SIGN = 2'd2
  } act_mode_e;

  // One entry of the layer table written by the host before a run.
  typedef struct packed {
    logic [15:0] fan_in;    // inputs per neuron of this layer
    logic [15:0] fan_out;   // neurons in this layer
    logic [15:0] row_base;  // weight-memory row of the layer's first neuron
    act_mode_e   act;       // activation function of the layer
  } layer_cfg_t;

endpackage
