// tb_mlp7_workload: a whole MLP-7-sized inference on the accelerator at its
// default size, with 503 split critical neurons.
//
// Network: 784 inputs (a 28x28 MNIST image), six hidden fully-connected
// layers of 512, 512, 512, 512, 512 and 256 neurons, and 10 outputs. The
// hidden layers hold 2816 neurons, the size of the 7-layer MLP this
// protection scheme was evaluated on; the split into these widths is this
// test's own choice. 503 hidden neurons (17.86%, the share found critical at
// a 20% vulnerability threshold) are picked at random and split: halved
// weights and bias, second split appended to its layer, both splits feeding
// the next layer with the original weight. Weights, biases and the image are
// random (no trained model is used); the test is about the datapath.
//
// A layer whose weights exceed the Weights/Bias Buffer runs in passes of at
// most floor(4096 / K) tiles, each pass with its own weights and out_base;
// the critical pairs go with the last pass. The host copies every layer's
// outputs into the Inputs Buffer for the next layer. Every activation of every
// layer is compared with a reference computed here, and each pass's busy time
// with sum over tiles (K + 3 + n) + 5*pairs + 2. A fault (0->1 in a split
// where the other split holds 0) is injected into one split of the first
// layer and must be masked.
module tb_mlp7_workload;
  import qnn_pkg::*;
  localparam int LANES = 16, WDEPTH = 4096, BDEPTH = 256;
  localparam int NL = 7;
  localparam int WIDTH [NL] = '{512, 512, 512, 512, 512, 256, 10};
  localparam int N_CRIT = 503;

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
  longint busy_total = 0;
  int n_fix = 0, n_passes = 0, n_masked = 0;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  // split network, layer l: w[l][n][k], b[l][n], pairs per layer
  data_t      w [NL][][];
  acc_t       b [NL][];
  int         K [NL], N [NL];
  crit_pair_t pairs [NL][$];
  localparam int SHIFT = 8;

  function automatic void ref_layer(int l, data_t x [], int fa, data_t fm, ref data_t y []);
    y = new[N[l]];
    for (int n = 0; n < N[l]; n++) begin
      longint s = b[l][n];
      for (int k = 0; k < K[l]; k++) s += longint'(x[k]) * longint'(w[l][n][k]);
      s = s >>> SHIFT;
      if (s < 0) s = 0;
      if (s > 127) s = 127;
      y[n] = data_t'(s);
      if (n == fa) y[n] = y[n] ^ fm;
    end
    foreach (pairs[l][i]) begin
      data_t a = y[pairs[l][i].addr_a], bb = y[pairs[l][i].addr_b], r;
      for (int j = 0; j < 8; j++) r[j] = (j != 6) && a[j] && bb[j];
      y[pairs[l][i].addr_a] = r;
      y[pairs[l][i].addr_b] = r;
    end
  endfunction

  // Run layer l on input x on the accelerator; y = Outputs Buffer contents.
  task automatic run_layer(int l, data_t x [], ref data_t y []);
    int tiles_per_pass = WDEPTH / K[l];
    int per_pass;
    if (tiles_per_pass > BDEPTH) tiles_per_pass = BDEPTH;
    per_pass = tiles_per_pass * LANES;
    @(negedge clk);
    for (int k = 0; k < K[l]; k++) begin
      in_we = 1; in_waddr = 12'(k); in_wdata = x[k]; @(negedge clk);
    end
    in_we = 0;
    for (int first = 0; first < N[l]; first += per_pass) begin
      int nn = (N[l] - first < per_pass) ? N[l] - first : per_pass;
      int tiles = (nn + LANES - 1) / LANES;
      bit last = (first + nn == N[l]);
      int np = last ? pairs[l].size() : 0;
      int cyc = 1, exp_cyc = 5 * np + 2, fixes = 0;
      for (int t = 0; t < tiles; t++) begin
        exp_cyc += K[l] + 3 + ((nn - t * LANES < LANES) ? nn - t * LANES : LANES);
        for (int p = 0; p < LANES; p++) begin
          int n = first + t * LANES + p;
          b_we = 1; b_waddr = 8'(t); b_lane = 4'(p); b_wdata = (n < first + nn) ? b[l][n] : '0;
          @(negedge clk);
          b_we = 0;
          for (int k = 0; k < K[l]; k++) begin
            w_we = 1; w_waddr = 12'(t * K[l] + k); w_lane = 4'(p);
            w_wdata = (n < first + nn) ? w[l][n][k] : '0;
            @(negedge clk);
          end
          w_we = 0;
        end
      end
      for (int i = 0; i < np; i++) begin
        ct_we = 1; ct_waddr = 10'(i); ct_wdata = pairs[l][i]; @(negedge clk);
      end
      ct_we = 0;
      cfg = '{num_in: 16'(K[l]), num_out: 16'(nn), num_crit: 16'(np), out_base: 16'(first),
              shift: 5'(SHIFT), relu_en: 1'b1, pool_max: 1'b0};
      start = 1; @(negedge clk); start = 0;
      while (!done) begin
        if (lcu_fix) fixes++;
        @(negedge clk);
        cyc++;
      end
      @(negedge clk);
      n_passes++;
      busy_total += cyc;
      n_fix += fixes;
      checks += 2;
      if (cyc != exp_cyc) fail($sformatf("layer %0d pass at %0d: %0d cycles, expected %0d", l, first, cyc, exp_cyc));
      if (fixes != np) fail($sformatf("layer %0d: %0d corrections, expected %0d", l, fixes, np));
    end
    y = new[N[l]];
    for (int n = 0; n < N[l]; n++) begin
      ob_raddr = 13'(n); @(negedge clk);
      y[n] = ob_rdata;
    end
  endtask

  initial begin
    data_t x [], y [], r [], f [], img [];
    bit crit [NL][];
    int ncrit_l [NL];
    int left = N_CRIT, hidden = 0, first_a, first_b, fbit;

    // choose 503 critical hidden neurons
    for (int l = 0; l < NL; l++) begin
      crit[l] = new[WIDTH[l]];
      if (l < NL - 1) hidden += WIDTH[l];
    end
    while (left > 0) begin
      automatic int pick = $urandom_range(0, hidden - 1), l = 0;
      while (pick >= WIDTH[l]) begin pick -= WIDTH[l]; l++; end
      if (!crit[l][pick]) begin crit[l][pick] = 1; left--; end
    end

    // build the split network
    for (int l = 0; l < NL; l++) begin
      automatic int Ko = (l == 0) ? 784 : WIDTH[l-1];
      automatic int extra = 0, idx;
      data_t wo [][];
      acc_t  bo [];
      K[l] = (l == 0) ? 784 : N[l-1];
      foreach (crit[l][n]) if (crit[l][n]) extra++;
      ncrit_l[l] = extra;
      N[l] = WIDTH[l] + extra;
      wo = new[WIDTH[l]]; bo = new[WIDTH[l]];
      for (int n = 0; n < WIDTH[l]; n++) begin
        wo[n] = new[K[l]];
        for (int k = 0; k < Ko; k++) wo[n][k] = data_t'($signed($urandom_range(0, 16)) - 8);
        // inputs coming from second splits of the previous layer repeat the
        // weight of the original neuron
        if (l > 0) begin
          idx = Ko;
          for (int m = 0; m < WIDTH[l-1]; m++)
            if (crit[l-1][m]) begin wo[n][idx] = wo[n][m]; idx++; end
        end
        bo[n] = acc_t'($signed($urandom_range(0, 4000)) - 1000);
      end
      w[l] = new[N[l]]; b[l] = new[N[l]];
      for (int n = 0; n < WIDTH[l]; n++) begin w[l][n] = wo[n]; b[l][n] = bo[n]; end
      idx = WIDTH[l];
      for (int n = 0; n < WIDTH[l]; n++)
        if (crit[l][n]) begin
          crit_pair_t p;
          w[l][idx] = new[K[l]];
          for (int k = 0; k < K[l]; k++) begin
            w[l][n][k]   = wo[n][k] >>> 1;
            w[l][idx][k] = wo[n][k] >>> 1;
          end
          b[l][n] = bo[n] >>> 1; b[l][idx] = bo[n] >>> 1;
          p.addr_a = 16'(n); p.addr_b = 16'(idx);
          pairs[l].push_back(p);
          idx++;
        end
      $display("layer %0d: K=%0d, %0d neurons + %0d splits", l, K[l], WIDTH[l], ncrit_l[l]);
    end

    x = new[784];
    foreach (x[k]) x[k] = data_t'($urandom_range(0, 127));
    img = x;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // inference
    for (int l = 0; l < NL; l++) begin
      automatic int nz = 0;
      automatic data_t xin [] = x;
      run_layer(l, xin, y);
      ref_layer(l, xin, -1, '0, r);
      foreach (r[n]) begin
        checks++;
        if (y[n] !== r[n]) fail($sformatf("layer %0d neuron %0d: got %0d expected %0d", l, n, y[n], r[n]));
        if (r[n] != 0) nz++;
      end
      $display("layer %0d: %0d of %0d activations non-zero", l, nz, N[l]);
      if (l == 0) f = y;
      x = y;
    end
    $display("class scores: %p", x);
    $display("busy cycles for the inference: %0d in %0d passes; LCU corrections: %0d",
             busy_total, n_passes, n_fix);
    checks++;
    if (n_fix != N_CRIT) fail($sformatf("%0d corrections in total, expected %0d", n_fix, N_CRIT));

    // layer 0 again with a fault in a split neuron that the LCU must mask
    first_a = pairs[0][0].addr_a; first_b = pairs[0][0].addr_b;
    fbit = -1;
    begin
      data_t pre [];
      automatic crit_pair_t keep [$] = pairs[0];
      pairs[0].delete();
      ref_layer(0, img, -1, '0, pre);
      pairs[0] = keep;
      for (int j = 0; j < 8; j++) if (j != 6 && !pre[first_a][j] && !pre[first_b][j]) fbit = j;
    end
    checks++;
    if (fbit < 0) fail("no bit is 0 in both splits");
    else begin
      fi_en = 1; fi_addr = 13'(first_a); fi_mask = data_t'(1 << fbit);
      run_layer(0, img, y);
      fi_en = 0;
      ref_layer(0, img, first_a, data_t'(1 << fbit), r);
      foreach (r[n]) begin
        checks++;
        if (y[n] !== r[n]) fail($sformatf("faulty layer 0 neuron %0d: got %0d expected %0d", n, y[n], r[n]));
      end
      checks++;
      if (y == f) n_masked++;
      else fail("fault in a split neuron was not masked");
    end
    $display("masked faults: %0d", n_masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
