// pe: processing element, one int8 x int8 multiply-accumulate per cycle.
//
// A PE holds the running sum of one output neuron (output-stationary).
// `load` puts the bias into the accumulator, each cycle with `en` high adds
// x*w. The product is formed and added in the same cycle; the accumulator is
// visible on `acc` the cycle after. Load has priority over en. The paper only
// names the PE; this MAC structure and the 32-bit accumulator are this
// design's choice.
module pe
  import qnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,   // acc <= bias
  input  acc_t  bias,
  input  logic  en,     // acc <= acc + x*w
  input  data_t x,
  input  data_t w,
  output acc_t  acc
);
  acc_t prod;
  assign prod = ACC_W'(x * w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc <= '0;
    else if (load) acc <= bias;
    else if (en)   acc <= acc + prod;
  end
endmodule
