// inputs_buffer: on-chip memory for the input activations of the layer.
//
// One int8 per word. The host writes it through port W before a layer
// starts; the controller reads it through port R, one activation per cycle,
// with a synchronous read (data one cycle after the address). The paper
// names this buffer; its depth (4096) and ports are this design's choice.
module inputs_buffer
  import qnn_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic [AW-1:0] raddr,
  output data_t         rdata
);
  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
