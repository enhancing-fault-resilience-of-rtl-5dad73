// qnn_pkg: types and constants shared by the quantized-network accelerator
// with a Lightweight Correction Unit (LCU).
//
// Activations, weights and LCU data are 8-bit two's-complement integers, as
// in the networks this accelerator targets (fully int8-quantized). Bit 7 is
// the sign, bit 6 the most significant bit of the integer part: the bit the
// LCU clears. Accumulator width, the layer-descriptor layout and the
// critical-pair record are choices of this design.
package qnn_pkg;

  localparam int unsigned DATA_W = 8;              // int8 activations and weights
  localparam int unsigned ACC_W  = 32;             // PE accumulator / bias width
  localparam int unsigned LCU_CLEAR_BIT = DATA_W - 2;  // MSB of the integer part
  localparam int unsigned CNT_W  = 16;             // width of counts and addresses in descriptors

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Layer descriptor presented by the host with `start`.
  typedef struct packed {
    logic [CNT_W-1:0] num_in;    // inputs per neuron (dot-product length), >= 1
    logic [CNT_W-1:0] num_out;   // output neurons of the layer, split neurons counted
    logic [CNT_W-1:0] num_crit;  // critical pairs to correct after the layer
    logic [CNT_W-1:0] out_base;  // Outputs Buffer address of neuron 0 of this pass
    logic [4:0]       shift;     // requantisation: arithmetic right shift of the accumulator
    logic             relu_en;   // apply ReLU before saturation
    logic             pool_max;  // max-pool: write max(new, value already at the address)
  } layer_cfg_t;

  // One critical neuron: the Outputs Buffer addresses of its two splits.
  typedef struct packed {
    logic [CNT_W-1:0] addr_a;
    logic [CNT_W-1:0] addr_b;
  } crit_pair_t;

  // Correction performed by the LCU, also used by reference models.
  function automatic data_t lcu_correct(data_t a, data_t b);
    data_t y;
    y = a & b;
    y[LCU_CLEAR_BIT] = 1'b0;
    return y;
  endfunction

endpackage
