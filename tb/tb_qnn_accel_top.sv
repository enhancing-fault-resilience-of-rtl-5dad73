// tb_qnn_accel_top: end-to-end test of the accelerator at its default size.
//
// The test builds a small two-layer int8 network, selects some neurons as
// critical and splits each into two neurons with halved weights and bias
// (the second split is appended after the layer's other neurons; the next
// layer gives both splits the original outgoing weight). The split network
// runs on the accelerator layer by layer: the host loads inputs, weights,
// biases and the critical pairs, starts the layer, waits for done and reads
// the Outputs Buffer back, then feeds it to the next layer.
//
// Every output is compared with a reference computed in this testbench
// (dot product, shift, ReLU, clip, then AND with bit 6 cleared for each
// pair). The busy time of every layer is checked against
// sum over tiles (K + 3 + n*(1+pool)) + 5*pairs + 2 cycles. The layers are then run
// again with a fault injected into one activation: a 0->1 flip in a split
// neuron where the other split has a 0 (must be masked by the LCU), a flip
// of bit 6 of a split (must be cleared), and a flip in an unprotected neuron
// (must reach the output, showing the hook works). Mechanisms counted and
// required at least once: multi-tile layer, partial last tile, LCU
// correction, LCU correction that changed the stored (faulty) value, masked fault, ReLU clamp,
// saturation, a layer written at a non-zero out_base, a max-pooling pass
// (two input vectors pooled onto the same outputs, then corrected).
module tb_qnn_accel_top;
  import qnn_pkg::*;
  localparam int LANES = 16;

  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg = '0;
  logic busy, done, lcu_fix, sat_event;
  logic in_we = 0, w_we = 0, b_we = 0, ct_we = 0, fi_en = 0;
  logic [11:0] in_waddr = '0, w_waddr = '0;
  logic [12:0] ob_raddr = '0, fi_addr = '0;
  data_t in_wdata = '0, w_wdata = '0, ob_rdata, fi_mask = '0;
  logic [3:0] w_lane = '0, b_lane = '0;
  logic [7:0] b_waddr = '0;
  acc_t b_wdata = '0;
  logic [9:0] ct_waddr = '0;
  crit_pair_t ct_wdata = '0;

  qnn_accel_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_multi_tile = 0, n_partial_tile = 0, n_lcu = 0, n_lcu_changed = 0, n_masked = 0,
      n_relu = 0, n_sat = 0, n_fault_seen = 0, n_bit6_cleared = 0, n_out_base = 0, n_pool = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  // ---------------- network description (split form) ----------------
  typedef struct {
    int K, N, shift;
    int ob;            // Outputs Buffer base address of the layer
    bit pool;          // max-pool onto what is already stored
    data_t w [][];     // [N][K]
    acc_t  b [];       // [N]
    crit_pair_t pairs [$];
  } layer_t;

  // Split the listed neurons of an original layer (Wo: [No][K]); the second
  // split of critical neuron crit[i] gets index No + i.
  function automatic layer_t split_layer(data_t wo [][], acc_t bo [], int K, int shift, int crit []);
    layer_t L;
    int No = bo.size();
    L.K = K; L.N = No + crit.size(); L.shift = shift; L.ob = 0; L.pool = 0;
    L.w = new[L.N]; L.b = new[L.N];
    for (int n = 0; n < No; n++) begin L.w[n] = new[K](wo[n]); L.b[n] = bo[n]; end
    foreach (crit[i]) begin
      int c = crit[i], s = No + i;
      crit_pair_t p;
      L.w[s] = new[K];
      for (int k = 0; k < K; k++) begin
        L.w[c][k] = wo[c][k] >>> 1;
        L.w[s][k] = wo[c][k] >>> 1;
      end
      L.b[c] = bo[c] >>> 1;
      L.b[s] = bo[c] >>> 1;
      p.addr_a = 16'(c); p.addr_b = 16'(s);
      L.pairs.push_back(p);
    end
    return L;
  endfunction

  // Reference output of a layer, with an optional 0->1/1->0 fault XORed into
  // activation fa before correction.
  function automatic void ref_layer(layer_t L, data_t x [], int fa, data_t fm, ref data_t y []);
    y = new[L.N];
    for (int n = 0; n < L.N; n++) begin
      longint s = L.b[n];
      for (int k = 0; k < L.K; k++) s += longint'(x[k]) * longint'(L.w[n][k]);
      s = s >>> L.shift;
      if (s < 0) s = 0;
      if (s > 127) s = 127;
      y[n] = data_t'(s);
      if (n == fa) y[n] = y[n] ^ fm;
    end
    foreach (L.pairs[i]) begin
      data_t a = y[L.pairs[i].addr_a], bb = y[L.pairs[i].addr_b], r;
      for (int j = 0; j < 8; j++) r[j] = (j != 6) && a[j] && bb[j];
      y[L.pairs[i].addr_a] = r;
      y[L.pairs[i].addr_b] = r;
    end
  endfunction

  // ---------------- host side ----------------
  task automatic load_layer(layer_t L, data_t x []);
    int tiles = (L.N + LANES - 1) / LANES;
    @(negedge clk);
    for (int k = 0; k < L.K; k++) begin
      in_we = 1; in_waddr = 12'(k); in_wdata = x[k]; @(negedge clk);
    end
    in_we = 0;
    for (int t = 0; t < tiles; t++)
      for (int p = 0; p < LANES; p++) begin
        int n = t * LANES + p;
        b_we = 1; b_waddr = 8'(t); b_lane = 4'(p); b_wdata = (n < L.N) ? L.b[n] : '0;
        @(negedge clk);
        b_we = 0;
        for (int k = 0; k < L.K; k++) begin
          w_we = 1; w_waddr = 12'(t * L.K + k); w_lane = 4'(p);
          w_wdata = (n < L.N) ? L.w[n][k] : '0;
          @(negedge clk);
        end
        w_we = 0;
      end
    foreach (L.pairs[i]) begin
      ct_we = 1; ct_waddr = 10'(i);
      ct_wdata.addr_a = L.pairs[i].addr_a + 16'(L.ob);
      ct_wdata.addr_b = L.pairs[i].addr_b + 16'(L.ob);
      @(negedge clk);
    end
    ct_we = 0;
  endtask

  task automatic run_layer(layer_t L, ref data_t y []);
    int tiles = (L.N + LANES - 1) / LANES, cyc = 1, exp_cyc, fixes = 0;
    exp_cyc = 5 * L.pairs.size() + 2;
    for (int t = 0; t < tiles; t++) begin
      int n = (L.N - t * LANES < LANES) ? L.N - t * LANES : LANES;
      exp_cyc += L.K + 3 + n * (L.pool ? 2 : 1);
      if (n < LANES) n_partial_tile++;
    end
    if (tiles > 1) n_multi_tile++;
    if (L.ob != 0) n_out_base++;
    if (L.pool) n_pool++;
    cfg = '{num_in: 16'(L.K), num_out: 16'(L.N), num_crit: 16'(L.pairs.size()), out_base: 16'(L.ob),
            shift: 5'(L.shift), relu_en: 1'b1, pool_max: L.pool};
    start = 1; @(negedge clk); start = 0;
    while (!done) begin
      if (lcu_fix) fixes++;
      if (sat_event) n_sat++;
      @(negedge clk);
      cyc++;
    end
    @(negedge clk);
    checks += 2;
    if (cyc != exp_cyc) fail($sformatf("layer K=%0d N=%0d: %0d cycles, expected %0d", L.K, L.N, cyc, exp_cyc));
    if (fixes != L.pairs.size()) fail($sformatf("%0d LCU corrections, expected %0d", fixes, L.pairs.size()));
    n_lcu += fixes;
    y = new[L.N];
    for (int n = 0; n < L.N; n++) begin
      ob_raddr = 13'(L.ob + n); @(negedge clk);
      y[n] = ob_rdata;
    end
  endtask

  task automatic compare(string tag, data_t got [], data_t exp []);
    foreach (exp[n]) begin
      checks++;
      if (got[n] !== exp[n]) fail($sformatf("%s neuron %0d: got %0d expected %0d", tag, n, got[n], exp[n]));
    end
  endtask

  // ---------------- test ----------------
  initial begin
    localparam int K1 = 48, N1 = 20, N2 = 10;
    data_t w1 [][], w2o [][], w2 [][];
    acc_t b1 [], b2 [];
    data_t x [], y1 [], y2 [], r1 [], r2 [], f1 [], g1 [];
    int crit1 [] = '{3, 7, 15};
    int crit2 [] = '{2};
    layer_t L1, L2;

    // original network
    w1 = new[N1]; b1 = new[N1];
    for (int n = 0; n < N1; n++) begin
      w1[n] = new[K1];
      for (int k = 0; k < K1; k++) w1[n][k] = data_t'($signed($urandom_range(0, 40)) - 20);
      b1[n] = acc_t'($signed($urandom_range(0, 2000)) - 1000);
    end
    L1 = split_layer(w1, b1, K1, 5, crit1);
    // layer 2 reads the split layer 1 (N1 + 3 inputs); both splits of a
    // critical neuron carry its original outgoing weight
    w2o = new[N2]; b2 = new[N2];
    for (int n = 0; n < N2; n++) begin
      w2o[n] = new[L1.N];
      for (int k = 0; k < N1; k++) w2o[n][k] = data_t'($signed($urandom_range(0, 30)) - 15);
      foreach (crit1[i]) w2o[n][N1 + i] = w2o[n][crit1[i]];
      b2[n] = acc_t'($signed($urandom_range(0, 400)) - 200);
    end
    L2 = split_layer(w2o, b2, L1.N, 4, crit2);
    L2.ob = 200;       // layer 2 results go to a different Outputs Buffer region

    x = new[K1];
    foreach (x[k]) x[k] = data_t'($urandom_range(0, 100));

    repeat (3) @(negedge clk);
    rst_n = 1;

    // fault-free run of both layers
    load_layer(L1, x);
    run_layer(L1, y1);
    ref_layer(L1, x, -1, '0, r1);
    compare("L1", y1, r1);
    foreach (r1[n]) if (r1[n] == 0) n_relu++;
    load_layer(L2, y1);
    run_layer(L2, y2);
    ref_layer(L2, y1, -1, '0, r2);
    compare("L2", y2, r2);

    // fault in a split neuron, 0->1 on a bit where the other split has 0
    begin
      data_t pre [];
      automatic layer_t Lnc = L1;
      int a, bsp, bit_i;
      Lnc.pairs.delete();
      ref_layer(Lnc, x, -1, '0, pre);
      a = L1.pairs[0].addr_a; bsp = L1.pairs[0].addr_b;
      bit_i = -1;
      for (int j = 0; j < 8; j++) if (j != 6 && !pre[a][j] && !pre[bsp][j]) bit_i = j;
      checks++;
      if (bit_i < 0) fail("no bit is 0 in both splits");
      else begin
        fi_en = 1; fi_addr = 13'(a); fi_mask = data_t'(1 << bit_i);
        load_layer(L1, x);
        run_layer(L1, f1);
        fi_en = 0;
        ref_layer(L1, x, a, data_t'(1 << bit_i), g1);
        compare("L1 split fault", f1, g1);
        checks++;
        if (f1 == y1) n_masked++;
        else fail("0->1 fault in a split neuron was not masked");
        if (f1[a] != (pre[a] ^ data_t'(1 << bit_i))) n_lcu_changed++;
      end
      // bit-6 flip in the second split of pair 1
      a = L1.pairs[1].addr_b;
      fi_en = 1; fi_addr = 13'(a); fi_mask = data_t'(8'h40);
      load_layer(L1, x);
      run_layer(L1, f1);
      fi_en = 0;
      ref_layer(L1, x, a, data_t'(8'h40), g1);
      compare("L1 bit6 fault", f1, g1);
      checks++;
      if (!f1[a][6] && !f1[L1.pairs[1].addr_a][6]) n_bit6_cleared++;
      else fail("bit 6 of a corrected pair is set");
      // flip in an unprotected neuron reaches the Outputs Buffer
      a = 0;
      fi_en = 1; fi_addr = 13'(a); fi_mask = data_t'(8'h20);
      load_layer(L1, x);
      run_layer(L1, f1);
      fi_en = 0;
      ref_layer(L1, x, a, data_t'(8'h20), g1);
      compare("L1 unprotected fault", f1, g1);
      checks++;
      if (f1[0] != y1[0]) n_fault_seen++;
      else fail("fault injection into an unprotected neuron had no effect");
    end

    // max pooling: two positions onto the same addresses, pairs corrected
    // after the second pass
    begin
      automatic layer_t P1 = L1, P2 = L1;
      data_t x2 [], ya [], yb [], yp [];
      x2 = new[K1];
      foreach (x2[k]) x2[k] = data_t'($urandom_range(0, 100));
      P1.pairs.delete();
      P2.pool = 1;
      load_layer(P1, x);
      run_layer(P1, ya);
      load_layer(P2, x2);
      run_layer(P2, yp);
      begin
        automatic layer_t Q = L1;
        Q.pairs.delete();
        ref_layer(Q, x, -1, '0, ya);
        ref_layer(Q, x2, -1, '0, yb);
      end
      foreach (ya[n]) if (yb[n] > ya[n]) ya[n] = yb[n];
      foreach (L1.pairs[i]) begin
        automatic data_t a = ya[L1.pairs[i].addr_a], bb = ya[L1.pairs[i].addr_b], r;
        for (int j = 0; j < 8; j++) r[j] = (j != 6) && a[j] && bb[j];
        ya[L1.pairs[i].addr_a] = r;
        ya[L1.pairs[i].addr_b] = r;
      end
      compare("L1 pooled", yp, ya);
    end

    $display("mechanisms: multi_tile=%0d partial_tile=%0d lcu=%0d lcu_changed=%0d masked=%0d bit6_cleared=%0d relu=%0d sat=%0d unprotected_fault=%0d out_base=%0d pool=%0d",
             n_multi_tile, n_partial_tile, n_lcu, n_lcu_changed, n_masked, n_bit6_cleared, n_relu, n_sat, n_fault_seen, n_out_base, n_pool);
    checks += 11;
    if (n_pool == 0)         fail("no pooling pass");
    if (n_out_base == 0)     fail("no pass with a non-zero out_base");
    if (n_multi_tile == 0)   fail("no multi-tile layer");
    if (n_partial_tile == 0) fail("no partial tile");
    if (n_lcu == 0)          fail("no LCU correction");
    if (n_lcu_changed == 0)  fail("no LCU correction changed a value");
    if (n_masked == 0)       fail("no fault masked");
    if (n_bit6_cleared == 0) fail("no bit-6 clear");
    if (n_relu == 0)         fail("no ReLU clamp");
    if (n_sat == 0)          fail("no saturation");
    if (n_fault_seen == 0)   fail("no unprotected fault observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
