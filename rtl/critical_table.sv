// critical_table: the list of critical neurons known to the controller.
//
// Entry c holds the two Outputs Buffer addresses of the split neurons that
// replace critical neuron c (a crit_pair_t). The host fills the table before
// a layer; the controller walks entries 0 .. num_crit-1 after the layer has
// been computed. Synchronous read. The paper states that the controller must
// know the critical neurons; holding them as address pairs in a table of
// 1024 entries is this design's choice (1024 covers the 622 critical neurons
// of the largest evaluated network at the 20% NVF threshold).
module critical_table
  import qnn_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  crit_pair_t    wdata,
  input  logic [AW-1:0] raddr,
  output crit_pair_t    rdata
);
  crit_pair_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
