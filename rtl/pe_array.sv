// pe_array: ROWS x COLS processing elements working on one tile of
// ROWS*COLS output neurons in parallel.
//
// Every PE computes one neuron of the tile. Each cycle the controller
// broadcasts one input activation `x` to all PEs and each PE receives its own
// weight w[p] (lane p = row*COLS + col), so after K enabled cycles PE p holds
// bias[p] + sum_k x_k * w_k[p]. The paper shows a 2-D grid of PEs but gives
// neither its size nor its dataflow; the broadcast, output-stationary
// dataflow and the 4x4 default are this design's choice.
module pe_array
  import qnn_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  acc_t  bias [ROWS*COLS],
  input  logic  en,
  input  data_t x,
  input  data_t w    [ROWS*COLS],
  output acc_t  acc  [ROWS*COLS]
);
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned P = r * COLS + c;
      pe u_pe (
        .clk  (clk),
        .rst_n(rst_n),
        .load (load),
        .bias (bias[P]),
        .en   (en),
        .x    (x),
        .w    (w[P]),
        .acc  (acc[P])
      );
    end
  end
endmodule
