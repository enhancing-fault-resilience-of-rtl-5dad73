// act_unit: activation / normalisation / pooling stage between the PEs and
// the Outputs Buffer.
//
// Converts one 32-bit accumulator into an int8 activation: arithmetic shift
// right by `shift` (a power-of-two requantisation, standing in for the
// normalisation scale), optional ReLU, then saturation to [-128, 127]. With
// pool_en, the result is max(activation, prev), where prev is the value
// already stored at the destination address: running several output
// positions onto one address in turn (first without pool_en) gives max
// pooling over them. Combinational. The publication names this stage
// ("activation function, pooling/normalization") without describing it; the
// shift-based scaling, ReLU and read-modify-write max pooling are this
// design's choices.
module act_unit
  import qnn_pkg::*;
(
  input  acc_t       acc,
  input  logic [4:0] shift,
  input  logic       relu_en,
  input  logic       pool_en,
  input  data_t      prev,        // value already at the destination (pooling)
  output data_t      y,
  output logic       saturated   // the value was clipped to the int8 range
);
  acc_t s;
  always_comb begin
    s = acc >>> shift;
    if (relu_en && s < 0) s = '0;
    saturated = 1'b0;
    if (s > 127) begin
      y = 8'sd127;
      saturated = 1'b1;
    end else if (s < -128) begin
      y = -8'sd128;
      saturated = 1'b1;
    end else begin
      y = data_t'(s);
    end
    if (pool_en && prev > y) y = prev;
  end
endmodule
