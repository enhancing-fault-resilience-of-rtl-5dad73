// outputs_buffer: on-chip memory for the output activations of the layer.
//
// One int8 per word. The controller owns the write port and read port A: it
// writes the activations of each tile and, after the layer, reads the two
// splits of every critical neuron and writes the LCU's corrected value back.
// Port B lets the host read the results. Both reads are synchronous (data one
// cycle after the address). A write and a port-A read of the same address in
// one cycle return the old value. The paper gives the buffer's role; depth
// and ports are this design's choice.
module outputs_buffer
  import qnn_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic [AW-1:0] raddr_a,
  output data_t         rdata_a,
  input  logic [AW-1:0] raddr_b,
  output data_t         rdata_b
);
  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end
endmodule
