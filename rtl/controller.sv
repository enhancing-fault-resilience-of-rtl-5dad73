// controller: sequencer of one layer, including the LCU correction pass.
//
// A layer is started with `start` and a layer descriptor (cfg, latched at
// start). Its num_out neurons are computed in tiles of LANES neurons, one
// neuron per PE. For tile t:
//   BIAS_RD  read bias word t                                   1 cycle
//   BIAS_LD  load the biases into the PEs                        1 cycle
//   MAC      read input k and weight word t*K+k, k = 0..K-1     K cycles
//            (the PEs accumulate one cycle later, pe_en)
//   DRAIN    last accumulation                                  1 cycle
//   WB       write act(acc[j]) to Outputs Buffer out_base+base+j  n cycles
//            (n = LANES, or what is left of num_out in the last tile)
//            With cfg.pool_max each write is preceded by a read of the same
//            address (WB_RD) and the activation unit writes the maximum of
//            the two: 2n cycles.
// Once all outputs are written, the controller walks the critical table:
// for each pair it reads both split outputs, the LCU combines them, and the
// corrected value is written back to both addresses (TAB, RA, RB, WA, WB:
// 5 cycles per pair; pair addresses are absolute). Then DONE pulses `done` for one cycle. Busy cycles of
// a layer: sum over tiles (K + 3 + n*(1+pool_max)) + 5*num_crit + 2.
// All neurons of one pass share the same input vector x[0..K-1].
//
// The paper gives the order "compute the layer, send the critical neurons
// to the LCU, write the corrected outputs back, continue"; the tiling,
// state sequence and timing are this design's choice. The LCU itself is
// outside: it sees lcu_a (first split, captured here) and the Outputs
// Buffer read data (second split), and ob_wsrc_lcu selects its result as
// the write data. out_base lets the host run a layer larger than the
// buffers allow in several passes (each with its own weights), giving the
// critical pairs only with the last pass.
module controller
  import qnn_pkg::*;
#(
  parameter int unsigned LANES     = 16,
  parameter int unsigned IN_DEPTH  = 4096,
  parameter int unsigned WDEPTH    = 4096,
  parameter int unsigned BDEPTH    = 256,
  parameter int unsigned OUT_DEPTH = 8192,
  parameter int unsigned CT_DEPTH  = 1024,
  localparam int unsigned IAW = $clog2(IN_DEPTH),
  localparam int unsigned WAW = $clog2(WDEPTH),
  localparam int unsigned BAW = $clog2(BDEPTH),
  localparam int unsigned OAW = $clog2(OUT_DEPTH),
  localparam int unsigned CAW = $clog2(CT_DEPTH),
  localparam int unsigned LW  = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  layer_cfg_t      cfg,
  output logic            busy,
  output logic            done,
  // Inputs Buffer / Weights/Bias Buffer reads
  output logic [IAW-1:0]  in_raddr,
  output logic [WAW-1:0]  w_raddr,
  output logic [BAW-1:0]  b_raddr,
  // PE array control
  output logic            pe_load,
  output logic            pe_en,
  output logic [LW-1:0]   acc_sel,     // accumulator passed to the activation unit
  output logic [4:0]      act_shift,   // latched descriptor fields for the activation unit
  output logic            act_relu,
  output logic            act_pool,
  // Outputs Buffer
  output logic            ob_we,
  output logic [OAW-1:0]  ob_waddr,
  output logic            ob_wsrc_lcu, // 0: activation unit, 1: LCU
  output logic [OAW-1:0]  ob_raddr,
  input  data_t           ob_rdata,
  // critical table
  output logic [CAW-1:0]  ct_raddr,
  input  crit_pair_t      ct_rdata,
  // LCU
  output data_t           lcu_a,
  output logic            lcu_fix      // a corrected value is being written (once per pair)
);
  typedef enum logic [3:0] {
    S_IDLE, S_BIAS_RD, S_BIAS_LD, S_MAC, S_DRAIN, S_WB_RD, S_WB,
    S_LCU_TAB, S_LCU_RA, S_LCU_RB, S_LCU_WA, S_LCU_WB, S_DONE
  } state_t;

  state_t           state;
  layer_cfg_t       cfg_q;
  logic [CNT_W-1:0] k;        // input index within the tile
  logic [CNT_W-1:0] j;        // lane being written back
  logic [CNT_W-1:0] base;     // first neuron of the tile
  logic [CNT_W-1:0] tile;
  logic [CNT_W-1:0] waddr_q;  // running weight address
  logic [CNT_W-1:0] c;        // critical pair index
  crit_pair_t       pair_q;
  data_t            a_q;
  logic             en_q;

  logic last_lane;
  assign last_lane = (j == CNT_W'(LANES - 1)) || (base + j + 1 >= cfg_q.num_out);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cfg_q   <= '0;
      k       <= '0;
      j       <= '0;
      base    <= '0;
      tile    <= '0;
      waddr_q <= '0;
      c       <= '0;
      pair_q  <= '0;
      a_q     <= '0;
      en_q    <= 1'b0;
    end else begin
      en_q <= (state == S_MAC);
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q   <= cfg;
          base    <= '0;
          tile    <= '0;
          waddr_q <= '0;
          c       <= '0;
          state   <= (cfg.num_out == 0) ? S_LCU_TAB : S_BIAS_RD;
        end
        S_BIAS_RD: state <= S_BIAS_LD;
        S_BIAS_LD: begin
          k     <= '0;
          state <= (cfg_q.num_in == 0) ? S_DRAIN : S_MAC;
        end
        S_MAC: begin
          k       <= k + 1;
          waddr_q <= waddr_q + 1;
          if (k + 1 == cfg_q.num_in) state <= S_DRAIN;
        end
        S_DRAIN: begin
          j     <= '0;
          state <= cfg_q.pool_max ? S_WB_RD : S_WB;
        end
        S_WB_RD: state <= S_WB;
        S_WB: begin
          j <= j + 1;
          if (!last_lane) state <= cfg_q.pool_max ? S_WB_RD : S_WB;
          else begin
            base <= base + CNT_W'(LANES);
            tile <= tile + 1;
            state <= (base + CNT_W'(LANES) < cfg_q.num_out) ? S_BIAS_RD : S_LCU_TAB;
          end
        end
        S_LCU_TAB: state <= (c == cfg_q.num_crit) ? S_DONE : S_LCU_RA;
        S_LCU_RA: begin
          pair_q <= ct_rdata;
          state  <= S_LCU_RB;
        end
        S_LCU_RB: begin
          a_q   <= ob_rdata;      // first split, read in S_LCU_RA
          state <= S_LCU_WA;
        end
        S_LCU_WA: state <= S_LCU_WB;
        S_LCU_WB: begin
          c     <= c + 1;
          state <= S_LCU_TAB;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy        = (state != S_IDLE);
    done        = (state == S_DONE);
    in_raddr    = IAW'(k);
    w_raddr     = WAW'(waddr_q);
    b_raddr     = BAW'(tile);
    pe_load     = (state == S_BIAS_LD);
    pe_en       = en_q;
    acc_sel     = LW'(j);
    act_shift   = cfg_q.shift;
    act_relu    = cfg_q.relu_en;
    act_pool    = cfg_q.pool_max;
    ob_we       = 1'b0;
    ob_waddr    = OAW'(cfg_q.out_base + base + j);
    ob_wsrc_lcu = 1'b0;
    ob_raddr    = OAW'(pair_q.addr_b);
    ct_raddr    = CAW'(c);
    lcu_a       = a_q;
    lcu_fix     = 1'b0;
    unique case (state)
      S_WB_RD:  ob_raddr = OAW'(cfg_q.out_base + base + j);
      S_WB:     ob_we = 1'b1;
      S_LCU_RA: ob_raddr = OAW'(ct_rdata.addr_a);
      S_LCU_WA: begin
        ob_we       = 1'b1;
        ob_waddr    = OAW'(pair_q.addr_a);
        ob_wsrc_lcu = 1'b1;
        lcu_fix     = 1'b1;
      end
      S_LCU_WB: begin
        ob_we       = 1'b1;
        ob_waddr    = OAW'(pair_q.addr_b);
        ob_wsrc_lcu = 1'b1;
      end
      default: ;
    endcase
  end

  // Write-back stays inside the layer; the two splits of a pair are distinct.
  a_wb_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WB) |-> (base + j < cfg_q.num_out));
  a_pair_distinct: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_LCU_WA) |-> (pair_q.addr_a != pair_q.addr_b));
endmodule
