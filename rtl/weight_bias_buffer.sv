// weight_bias_buffer: on-chip memory for the parameters of the layer.
//
// Weights: WDEPTH words, each holding LANES int8 weights, one per PE. Word
// t*K + k holds weight k of the LANES neurons of tile t (K = inputs per
// neuron). Biases: BDEPTH words of LANES 32-bit biases, word t for tile t.
// The host writes one lane at a time; the controller reads a whole word with
// a synchronous read (data one cycle after the address). The paper names a
// "Weights/Bias Buffer"; the layout and sizes are this design's choice.
module weight_bias_buffer
  import qnn_pkg::*;
#(
  parameter int unsigned LANES  = 16,
  parameter int unsigned WDEPTH = 4096,
  parameter int unsigned BDEPTH = 256,
  localparam int unsigned WAW   = $clog2(WDEPTH),
  localparam int unsigned BAW   = $clog2(BDEPTH),
  localparam int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic           clk,
  // host write, weights
  input  logic           w_we,
  input  logic [WAW-1:0] w_waddr,
  input  logic [LW-1:0]  w_lane,
  input  data_t          w_wdata,
  // host write, biases
  input  logic           b_we,
  input  logic [BAW-1:0] b_waddr,
  input  logic [LW-1:0]  b_lane,
  input  acc_t           b_wdata,
  // controller read
  input  logic [WAW-1:0] w_raddr,
  output data_t          w_rdata [LANES],
  input  logic [BAW-1:0] b_raddr,
  output acc_t           b_rdata [LANES]
);
  data_t wmem [WDEPTH][LANES];
  acc_t  bmem [BDEPTH][LANES];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_waddr][w_lane] <= w_wdata;
    if (b_we) bmem[b_waddr][b_lane] <= b_wdata;
    w_rdata <= wmem[w_raddr];
    b_rdata <= bmem[b_raddr];
  end
endmodule
