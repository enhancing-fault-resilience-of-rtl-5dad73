// lcu: Lightweight Correction Unit.
//
// A critical neuron is executed as two split neurons whose weights and bias
// are halved, so each split output is about half the original and bit 6 (the
// top integer bit of an int8) of a fault-free split output is expected to be
// 0. Because a 0->1 flip is the harmful one, the LCU keeps a bit only if both
// splits agree on a 1 (bitwise AND) and then forces bit 6 to 0. The result
// is written back to the Outputs Buffer at both split addresses. Both
// operations follow the paper exactly; the unit is purely combinational
// (zero latency); registering it is left to the controller.
//
// Ports: inp1, inp2 - the two split outputs; out - corrected value.
module lcu
  import qnn_pkg::*;
#(
  parameter int unsigned W         = DATA_W,        // data width
  parameter int unsigned CLEAR_BIT = W - 2          // bit forced to 0
) (
  input  logic [W-1:0] inp1,
  input  logic [W-1:0] inp2,
  output logic [W-1:0] out
);
  always_comb begin
    out            = inp1 & inp2;   // 1) out = inp1 AND inp2
    out[CLEAR_BIT] = 1'b0;          // 2) out(6) = 0
  end
endmodule
