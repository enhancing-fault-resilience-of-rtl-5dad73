// tb_controller: self-checking test of the layer controller on its own.
//
// The Outputs Buffer and the critical table are modelled here as arrays with
// one-cycle reads; the activation values are stand-ins computed from the
// address. For several layer shapes the test checks: the input and weight
// addresses issued before every PE enable (k = 0..K-1, weights running
// t*K+k), one bias load per tile, write-back addresses out_base .. out_base+N-1 in order with
// the lane select matching, and for every critical pair the write of the
// corrected value first to addr_a and then to addr_b, where the expected
// correction (AND, bit 6 cleared) is computed here bit by bit. The busy
// time must equal sum over tiles (K + 3 + n*(1+pool)) + 5*pairs + 2 cycles;
// with pooling each write must follow a read of the same address.
module tb_controller;
  import qnn_pkg::*;
  localparam int LANES = 16;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg = '0;
  logic busy, done, pe_load, pe_en, ob_we, ob_wsrc_lcu, lcu_fix, act_relu, act_pool;
  logic [11:0] in_raddr, w_raddr;
  logic [12:0] ob_waddr, ob_raddr;
  logic [7:0]  b_raddr;
  logic [3:0]  acc_sel;
  logic [4:0]  act_shift;
  logic [9:0]  ct_raddr;
  data_t ob_rdata, lcu_a;
  crit_pair_t ct_rdata;
  int checks = 0, failures = 0;

  data_t      ob_mem [8192];
  crit_pair_t ct_mem [1024];

  controller #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    ob_rdata <= ob_mem[ob_raddr];
    ct_rdata <= ct_mem[ct_raddr];
  end

  function automatic data_t stand_in(int addr);
    return data_t'(addr * 37 + 11);
  endfunction

  function automatic data_t corr(data_t a, data_t b);
    data_t r;
    for (int i = 0; i < 8; i++) r[i] = (i != 6) && a[i] && b[i];
    return r;
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int K, int N, int C, int OB = 0, bit POOL = 0);
    int tiles, exp_cycles, busy_cycles, loads, ens, next_wb, k_exp, w_exp, pair_i, phase;
    logic [11:0] prev_in, prev_w;
    logic [12:0] prev_ob_raddr;
    logic prev_issue;
    data_t expv, pend;
    crit_pair_t pairs [$];
    // critical pairs: distinct random addresses inside the layer (or anywhere if N = 0)
    for (int c = 0; c < C; c++) begin
      crit_pair_t p;
      int lim = (N > 1) ? N - 1 : 8191;
      p.addr_a = 16'(OB + $urandom_range(0, lim));
      do p.addr_b = 16'(OB + $urandom_range(0, lim)); while (p.addr_b == p.addr_a);
      ct_mem[c] = p;
      pairs.push_back(p);
    end
    tiles = (N + LANES - 1) / LANES;
    exp_cycles = 5 * C + 2;
    for (int t = 0; t < tiles; t++)
      exp_cycles += K + 3 + (1 + POOL) * ((N - t * LANES < LANES) ? N - t * LANES : LANES);
    cfg = '{num_in: 16'(K), num_out: 16'(N), num_crit: 16'(C), out_base: 16'(OB), shift: 5'd3, relu_en: 1'b1, pool_max: POOL};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    busy_cycles = 1; loads = 0; ens = 0; next_wb = 0; k_exp = 0; w_exp = 0; pair_i = 0; phase = 0;
    prev_issue = 0;
    checks++;
    if (act_shift !== 5'd3 || act_relu !== 1'b1 || act_pool !== POOL) fail("descriptor fields not latched");
    while (!done) begin
      // sample in the middle of the cycle, act at the next posedge
      if (pe_load) loads++;
      if (pe_en) begin
        ens++;
        checks++;
        if (prev_in !== 12'(k_exp) || prev_w !== 12'(w_exp))
          fail($sformatf("MAC %0d: in_raddr=%0d w_raddr=%0d exp %0d/%0d", ens, prev_in, prev_w, k_exp, w_exp));
        k_exp = (k_exp + 1 == K) ? 0 : k_exp + 1;
        w_exp++;
      end
      prev_in = in_raddr; prev_w = w_raddr;
      if (ob_we && !ob_wsrc_lcu) begin
        checks++;
        if (ob_waddr !== 13'(OB + next_wb) || acc_sel !== 4'(next_wb % LANES) || b_raddr !== 8'(next_wb / LANES))
          fail($sformatf("write-back addr=%0d lane=%0d exp %0d", ob_waddr, acc_sel, next_wb));
        if (POOL) begin
          checks++;
          if (prev_ob_raddr !== ob_waddr) fail($sformatf("pool: read %0d before write %0d", prev_ob_raddr, ob_waddr));
        end
        ob_mem[ob_waddr] = stand_in(ob_waddr);
        next_wb++;
      end else if (ob_we && ob_wsrc_lcu) begin
        crit_pair_t p = pairs[pair_i];
        checks++;
        if (phase == 0) begin
          expv = corr(ob_mem[p.addr_a], ob_mem[p.addr_b]);
          if (lcu_a !== ob_mem[p.addr_a] || ob_rdata !== ob_mem[p.addr_b] || ob_waddr !== p.addr_a[12:0] || !lcu_fix)
            fail($sformatf("pair %0d first write addr=%0d lcu_a=%0d rdata=%0d", pair_i, ob_waddr, lcu_a, ob_rdata));
          pend = corr(lcu_a, ob_rdata);
          ob_mem[ob_waddr] = pend;
          phase = 1;
        end else begin
          if (ob_waddr !== p.addr_b[12:0] || corr(lcu_a, ob_rdata) !== expv || lcu_fix)
            fail($sformatf("pair %0d second write addr=%0d", pair_i, ob_waddr));
          ob_mem[ob_waddr] = corr(lcu_a, ob_rdata);
          phase = 0;
          pair_i++;
        end
      end
      prev_ob_raddr = ob_raddr;
      @(negedge clk);
      busy_cycles++;
    end
    checks += 4;
    if (loads != tiles) fail($sformatf("bias loads %0d exp %0d", loads, tiles));
    if (next_wb != N) fail($sformatf("write-backs %0d exp %0d", next_wb, N));
    if (pair_i != C) fail($sformatf("pairs corrected %0d exp %0d", pair_i, C));
    if (busy_cycles != exp_cycles) fail($sformatf("K=%0d N=%0d C=%0d busy %0d cycles exp %0d", K, N, C, busy_cycles, exp_cycles));
    // K*tiles enables minus none: every tile accumulates K inputs
    checks++;
    if (ens != K * tiles) fail($sformatf("PE enables %0d exp %0d", ens, K * tiles));
    @(negedge clk);
    checks++;
    if (busy) fail("still busy after done");
  endtask

  initial begin
    foreach (ob_mem[i]) ob_mem[i] = '0;
    foreach (ct_mem[i]) ct_mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (busy || done) fail("busy after reset");
    run_layer(5, 40, 3);
    run_layer(1, 16, 0);
    run_layer(20, 7, 2);
    run_layer(3, 0, 1);
    run_layer(9, 100, 25);
    run_layer(4, 33, 4, 1000);
    run_layer(6, 21, 2, 300, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
