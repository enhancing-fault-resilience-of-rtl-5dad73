// qnn_accel_top: QNN accelerator with a Lightweight Correction Unit.
//
// The accelerator computes one int8 layer per `start`: the controller feeds
// input activations (Inputs Buffer) and weights/biases (Weights/Bias Buffer)
// to a ROWS x COLS PE array, passes each accumulator through the activation
// unit and writes the int8 results into the Outputs Buffer. The network it
// runs has had its critical neurons split in two (halved weights and bias);
// after the layer the controller walks the critical table, feeds both split
// outputs of each critical neuron to the LCU and writes the corrected value
// back to both split addresses. The computational part is not modified for
// this: only the controller, the critical table and the LCU are added.
//
// Host side: before `start`, write inputs (in_*), weights and biases
// (w_*, b_*, lane = PE index) and the critical pairs (ct_*); after `done`,
// read results through ob_raddr/ob_rdata (synchronous, one cycle). Layers
// are chained by the host copying outputs to inputs. With cfg.pool_max each
// result is max-ed with the word already at its address, so several passes
// onto one out_base give max pooling. Buffers must not be
// written while busy.
//
// fi_en/fi_addr/fi_mask: fault-injection hook for test. While enabled, the
// activation written to Outputs Buffer address fi_addr during the layer
// (not the LCU write-back) is XORed with fi_mask, modelling a fault in the
// computational part. Tie fi_en low in use. It is this design's addition.
//
// Block structure follows the paper's accelerator view; sizes (4x4 PEs,
// buffer depths) are this design's choice.
module qnn_accel_top
  import qnn_pkg::*;
#(
  parameter int unsigned ROWS      = 4,
  parameter int unsigned COLS      = 4,
  parameter int unsigned IN_DEPTH  = 4096,
  parameter int unsigned WDEPTH    = 4096,
  parameter int unsigned BDEPTH    = 256,
  parameter int unsigned OUT_DEPTH = 8192,
  parameter int unsigned CT_DEPTH  = 1024,
  localparam int unsigned LANES = ROWS * COLS,
  localparam int unsigned IAW = $clog2(IN_DEPTH),
  localparam int unsigned WAW = $clog2(WDEPTH),
  localparam int unsigned BAW = $clog2(BDEPTH),
  localparam int unsigned OAW = $clog2(OUT_DEPTH),
  localparam int unsigned CAW = $clog2(CT_DEPTH),
  localparam int unsigned LW  = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // layer control
  input  logic           start,
  input  layer_cfg_t     cfg,
  output logic           busy,
  output logic           done,
  output logic           lcu_fix,     // one pulse per corrected critical neuron
  output logic           sat_event,   // an activation was clipped to int8
  // host writes
  input  logic           in_we,
  input  logic [IAW-1:0] in_waddr,
  input  data_t          in_wdata,
  input  logic           w_we,
  input  logic [WAW-1:0] w_waddr,
  input  logic [LW-1:0]  w_lane,
  input  data_t          w_wdata,
  input  logic           b_we,
  input  logic [BAW-1:0] b_waddr,
  input  logic [LW-1:0]  b_lane,
  input  acc_t           b_wdata,
  input  logic           ct_we,
  input  logic [CAW-1:0] ct_waddr,
  input  crit_pair_t     ct_wdata,
  // host read of results
  input  logic [OAW-1:0] ob_raddr,
  output data_t          ob_rdata,
  // fault injection (test only)
  input  logic           fi_en,
  input  logic [OAW-1:0] fi_addr,
  input  data_t          fi_mask
);
  logic [IAW-1:0] in_raddr;
  data_t          in_rdata;
  logic [WAW-1:0] w_raddr;
  data_t          w_rdata [LANES];
  logic [BAW-1:0] b_raddr;
  acc_t           b_rdata [LANES];
  logic           pe_load, pe_en;
  acc_t           acc [LANES];
  logic [LW-1:0]  acc_sel;
  logic [4:0]     cfg_shift;
  logic           cfg_relu;
  logic           cfg_pool;
  data_t          act_y;
  logic           act_sat;
  logic           obw_we, obw_src_lcu;
  logic [OAW-1:0] obw_addr, obc_raddr;
  data_t          obc_rdata, ob_wdata, lcu_a, lcu_y;
  logic [CAW-1:0] ct_raddr;
  crit_pair_t     ct_rdata;

  inputs_buffer #(.DEPTH(IN_DEPTH)) u_inputs (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .raddr(in_raddr), .rdata(in_rdata)
  );

  weight_bias_buffer #(.LANES(LANES), .WDEPTH(WDEPTH), .BDEPTH(BDEPTH)) u_params (
    .clk,
    .w_we, .w_waddr, .w_lane, .w_wdata,
    .b_we, .b_waddr, .b_lane, .b_wdata,
    .w_raddr, .w_rdata, .b_raddr, .b_rdata
  );

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_pes (
    .clk, .rst_n, .load(pe_load), .bias(b_rdata), .en(pe_en),
    .x(in_rdata), .w(w_rdata), .acc
  );

  act_unit u_act (
    .acc(acc[acc_sel]), .shift(cfg_shift), .relu_en(cfg_relu),
    .pool_en(cfg_pool), .prev(obc_rdata),
    .y(act_y), .saturated(act_sat)
  );

  lcu u_lcu (.inp1(lcu_a), .inp2(obc_rdata), .out(lcu_y));

  critical_table #(.DEPTH(CT_DEPTH)) u_ct (
    .clk, .we(ct_we), .waddr(ct_waddr), .wdata(ct_wdata),
    .raddr(ct_raddr), .rdata(ct_rdata)
  );

  outputs_buffer #(.DEPTH(OUT_DEPTH)) u_outputs (
    .clk, .we(obw_we), .waddr(obw_addr), .wdata(ob_wdata),
    .raddr_a(obc_raddr), .rdata_a(obc_rdata),
    .raddr_b(ob_raddr),  .rdata_b(ob_rdata)
  );

  controller #(
    .LANES(LANES), .IN_DEPTH(IN_DEPTH), .WDEPTH(WDEPTH), .BDEPTH(BDEPTH),
    .OUT_DEPTH(OUT_DEPTH), .CT_DEPTH(CT_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .in_raddr, .w_raddr, .b_raddr,
    .pe_load, .pe_en, .acc_sel, .act_shift(cfg_shift), .act_relu(cfg_relu), .act_pool(cfg_pool),
    .ob_we(obw_we), .ob_waddr(obw_addr), .ob_wsrc_lcu(obw_src_lcu),
    .ob_raddr(obc_raddr), .ob_rdata(obc_rdata),
    .ct_raddr, .ct_rdata,
    .lcu_a, .lcu_fix
  );

  always_comb begin
    if (obw_src_lcu) ob_wdata = lcu_y;
    else if (fi_en && obw_addr == fi_addr) ob_wdata = act_y ^ fi_mask;
    else ob_wdata = act_y;
  end

  assign sat_event = obw_we && !obw_src_lcu && act_sat;

  a_no_host_write_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(in_we || w_we || b_we || ct_we));
endmodule
