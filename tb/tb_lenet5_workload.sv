// tb_lenet5_workload: a whole LeNet-5-sized inference on the accelerator at
// its default size, using the convolution mapping and the max pooling.
//
// Network (MNIST-sized): a 28x28 image; conv1 6x5x5 -> 6x24x24, ReLU, 2x2 max
// pool -> 6x12x12; conv2 16x(6x5x5) -> 16x8x8, ReLU, 2x2 max pool -> 16x4x4;
// fully-connected layers of 120 and 84 neurons and 10 outputs. The conv and
// hidden fully-connected outputs number 3456 + 1024 + 120 + 84 = 4684, the
// neuron count of the LeNet-5 the protection scheme was evaluated on; its 187
// critical neurons are split here too. Weights, biases and the image are random.
//
// A convolution runs as one pass per output position: the host writes that
// position's 5x5xCin input patch (word (ky*5+kx)*Cin+ci) to the Inputs Buffer;
// the weights of all output channels stay loaded for the whole layer. The four
// passes of one 2x2 pooling window write the same out_base, the first with
// pool_max = 0 and the other three with pool_max = 1, so the Outputs Buffer
// ends up holding the pooled map (word (py*Wp+px)*Cout+c). Splitting a conv
// output element would mix halved and whole values in one pooling window; how
// that is meant to work is not described, so this test places the 187 split
// neurons in the two hidden fully-connected layers (120 + 84 = 204 neurons).
// Every pass's busy time is checked against K + 3 + n*(1 + pool_max) + 5*pairs
// + 2, every output of every layer against a reference model that computes
// the convolutions and pooling directly, and a 0->1 fault in a split of the
// first fully-connected layer must be masked by the LCU.
module tb_lenet5_workload;
  import qnn_pkg::*;
  localparam int LANES = 16, WDEPTH = 4096, BDEPTH = 256;
  localparam int NL = 5;                    // layers 0,1 conv; 2,3,4 fully connected
  localparam int CIN  [2] = '{1, 6};
  localparam int COUT [2] = '{6, 16};
  localparam int HIN  [2] = '{28, 12};
  localparam int FCW  [3] = '{120, 84, 10};
  localparam int N_CRIT = 187;
  localparam int SHIFTS [NL] = '{4, 6, 7, 7, 7};

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
  int n_fix = 0, n_passes = 0, n_masked = 0, n_pool_passes = 0;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  function automatic data_t act(longint s, int sh);
    s = s >>> sh;
    if (s < 0) s = 0;
    if (s > 127) s = 127;
    return data_t'(s);
  endfunction

  // conv weights wc[l][((co*Cin + ci)*5 + ky)*5 + kx], biases bc[l][co]
  data_t wc [2][];
  acc_t  bc [2][];

  // Reference: conv (valid, stride 1), ReLU, 2x2 max pool. in/out are HWC.
  function automatic void ref_conv(int l, data_t in [], ref data_t out []);
    int H = HIN[l], Ci = CIN[l], Co = COUT[l], Ho = HIN[l] - 4, Hp = (HIN[l] - 4) / 2;
    data_t full [];
    full = new[Ho * Ho * Co];
    for (int co = 0; co < Co; co++)
      for (int oy = 0; oy < Ho; oy++)
        for (int ox = 0; ox < Ho; ox++) begin
          longint s = bc[l][co];
          for (int ci = 0; ci < Ci; ci++)
            for (int ky = 0; ky < 5; ky++)
              for (int kx = 0; kx < 5; kx++)
                s += longint'(in[((oy + ky) * H + ox + kx) * Ci + ci]) *
                     longint'(wc[l][((co * Ci + ci) * 5 + ky) * 5 + kx]);
          full[(oy * Ho + ox) * Co + co] = act(s, SHIFTS[l]);
        end
    out = new[Hp * Hp * Co];
    for (int py = 0; py < Hp; py++)
      for (int px = 0; px < Hp; px++)
        for (int co = 0; co < Co; co++) begin
          data_t m = full[((2 * py) * Ho + 2 * px) * Co + co];
          for (int d = 1; d < 4; d++) begin
            data_t v = full[((2 * py + d / 2) * Ho + 2 * px + d % 2) * Co + co];
            if (v > m) m = v;
          end
          out[(py * Hp + px) * Co + co] = m;
        end
  endfunction

  // Run conv layer l with pooling on the accelerator.
  task automatic run_conv(int l, data_t in [], ref data_t out []);
    int H = HIN[l], Ci = CIN[l], Co = COUT[l], Hp = (HIN[l] - 4) / 2, K = 25 * CIN[l];
    @(negedge clk);
    for (int co = 0; co < Co; co++) begin
      b_we = 1; b_waddr = 0; b_lane = 4'(co); b_wdata = bc[l][co]; @(negedge clk);
      b_we = 0;
      for (int ky = 0; ky < 5; ky++)
        for (int kx = 0; kx < 5; kx++)
          for (int ci = 0; ci < Ci; ci++) begin
            w_we = 1; w_waddr = 12'((ky * 5 + kx) * Ci + ci); w_lane = 4'(co);
            w_wdata = wc[l][((co * Ci + ci) * 5 + ky) * 5 + kx];
            @(negedge clk);
          end
      w_we = 0;
    end
    for (int py = 0; py < Hp; py++)
      for (int px = 0; px < Hp; px++)
        for (int d = 0; d < 4; d++) begin
          automatic int oy = 2 * py + d / 2, ox = 2 * px + d % 2;
          automatic int cyc = 1, exp_cyc = K + 3 + Co * ((d != 0) ? 2 : 1) + 2;
          for (int ky = 0; ky < 5; ky++)
            for (int kx = 0; kx < 5; kx++)
              for (int ci = 0; ci < Ci; ci++) begin
                in_we = 1; in_waddr = 12'((ky * 5 + kx) * Ci + ci);
                in_wdata = in[((oy + ky) * H + ox + kx) * Ci + ci];
                @(negedge clk);
              end
          in_we = 0;
          cfg = '{num_in: 16'(K), num_out: 16'(Co), num_crit: 16'd0,
                  out_base: 16'((py * Hp + px) * Co), shift: 5'(SHIFTS[l]),
                  relu_en: 1'b1, pool_max: (d != 0)};
          start = 1; @(negedge clk); start = 0;
          while (!done) begin @(negedge clk); cyc++; end
          @(negedge clk);
          n_passes++;
          if (d != 0) n_pool_passes++;
          busy_total += cyc;
          checks++;
          if (cyc != exp_cyc) fail($sformatf("conv %0d pass (%0d,%0d): %0d cycles, expected %0d", l, oy, ox, cyc, exp_cyc));
        end
    out = new[Hp * Hp * Co];
    foreach (out[i]) begin
      ob_raddr = 13'(i); @(negedge clk);
      out[i] = ob_rdata;
    end
  endtask

  // split fully-connected network, indexed by layer l = 2..4
  data_t      w [NL][][];
  acc_t       b [NL][];
  int         K [NL], N [NL];
  crit_pair_t pairs [NL][$];

  function automatic void ref_layer(int l, data_t x [], int fa, data_t fm, ref data_t y []);
    y = new[N[l]];
    for (int n = 0; n < N[l]; n++) begin
      longint s = b[l][n];
      for (int k = 0; k < K[l]; k++) s += longint'(x[k]) * longint'(w[l][n][k]);
      s = s >>> SHIFTS[l];
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
              shift: 5'(SHIFTS[l]), relu_en: 1'b1, pool_max: 1'b0};
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
    data_t img [], p1 [], p2 [], r1 [], r2 [], x [], y [], r [], f [], fcin [];
    bit crit [NL][];
    int left = N_CRIT, first_a, first_b, fbit;

    for (int l = 0; l < 2; l++) begin
      wc[l] = new[COUT[l] * CIN[l] * 25];
      foreach (wc[l][i]) wc[l][i] = data_t'($signed($urandom_range(0, 16)) - 8);
      bc[l] = new[COUT[l]];
      foreach (bc[l][i]) bc[l][i] = acc_t'($signed($urandom_range(0, 2000)) - 500);
    end

    // choose the critical neurons among the 204 hidden fully-connected ones
    for (int l = 2; l < NL; l++) crit[l] = new[FCW[l-2]];
    while (left > 0) begin
      automatic int pick = $urandom_range(0, FCW[0] + FCW[1] - 1);
      automatic int l = (pick < FCW[0]) ? 2 : 3;
      if (l == 3) pick -= FCW[0];
      if (!crit[l][pick]) begin crit[l][pick] = 1; left--; end
    end

    // build the split fully-connected layers
    for (int l = 2; l < NL; l++) begin
      automatic int Ko = (l == 2) ? 256 : FCW[l-3];
      automatic int extra = 0, idx;
      data_t wo [][];
      acc_t  bo [];
      K[l] = (l == 2) ? 256 : N[l-1];
      foreach (crit[l][n]) if (crit[l][n]) extra++;
      N[l] = FCW[l-2] + extra;
      wo = new[FCW[l-2]]; bo = new[FCW[l-2]];
      for (int n = 0; n < FCW[l-2]; n++) begin
        wo[n] = new[K[l]];
        for (int k = 0; k < Ko; k++) wo[n][k] = data_t'($signed($urandom_range(0, 16)) - 8);
        if (l > 2) begin
          idx = Ko;
          for (int m = 0; m < FCW[l-3]; m++)
            if (crit[l-1][m]) begin wo[n][idx] = wo[n][m]; idx++; end
        end
        bo[n] = acc_t'($signed($urandom_range(0, 4000)) - 1000);
      end
      w[l] = new[N[l]]; b[l] = new[N[l]];
      for (int n = 0; n < FCW[l-2]; n++) begin w[l][n] = wo[n]; b[l][n] = bo[n]; end
      idx = FCW[l-2];
      for (int n = 0; n < FCW[l-2]; n++)
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
      $display("layer %0d: K=%0d, %0d neurons + %0d splits", l, K[l], FCW[l-2], extra);
    end

    img = new[784];
    foreach (img[k]) img[k] = data_t'($urandom_range(0, 127));

    repeat (3) @(negedge clk);
    rst_n = 1;

    // conv1 + pool, conv2 + pool
    run_conv(0, img, p1);
    ref_conv(0, img, r1);
    run_conv(1, r1, p2);
    ref_conv(1, r1, r2);
    foreach (r1[i]) begin
      checks++;
      if (p1[i] !== r1[i]) fail($sformatf("pool1 word %0d: got %0d expected %0d", i, p1[i], r1[i]));
    end
    foreach (r2[i]) begin
      checks++;
      if (p2[i] !== r2[i]) fail($sformatf("pool2 word %0d: got %0d expected %0d", i, p2[i], r2[i]));
    end
    begin
      automatic int nz1 = 0, nz2 = 0;
      foreach (r1[i]) if (r1[i] != 0) nz1++;
      foreach (r2[i]) if (r2[i] != 0) nz2++;
      $display("pool1: %0d of %0d non-zero; pool2: %0d of %0d non-zero", nz1, r1.size(), nz2, r2.size());
    end

    // fully-connected layers
    x = r2;
    fcin = r2;
    for (int l = 2; l < NL; l++) begin
      automatic data_t xin [] = x;
      run_layer(l, xin, y);
      ref_layer(l, xin, -1, '0, r);
      foreach (r[n]) begin
        checks++;
        if (y[n] !== r[n]) fail($sformatf("layer %0d neuron %0d: got %0d expected %0d", l, n, y[n], r[n]));
      end
      if (l == 2) f = y;
      x = y;
    end
    $display("class scores: %p", x);
    $display("busy cycles for the inference: %0d in %0d passes (%0d pooling); LCU corrections: %0d",
             busy_total, n_passes, n_pool_passes, n_fix);
    checks += 2;
    if (n_fix != N_CRIT) fail($sformatf("%0d corrections in total, expected %0d", n_fix, N_CRIT));
    if (n_pool_passes != 3 * (144 + 16)) fail($sformatf("%0d pooling passes", n_pool_passes));

    // first fully-connected layer again, with a fault the LCU must mask
    first_a = pairs[2][0].addr_a; first_b = pairs[2][0].addr_b;
    fbit = -1;
    begin
      data_t pre [];
      automatic crit_pair_t keep [$] = pairs[2];
      pairs[2].delete();
      ref_layer(2, fcin, -1, '0, pre);
      pairs[2] = keep;
      for (int j = 0; j < 8; j++) if (j != 6 && !pre[first_a][j] && !pre[first_b][j]) fbit = j;
    end
    checks++;
    if (fbit < 0) fail("no bit is 0 in both splits");
    else begin
      fi_en = 1; fi_addr = 13'(first_a); fi_mask = data_t'(1 << fbit);
      run_layer(2, fcin, y);
      fi_en = 0;
      ref_layer(2, fcin, first_a, data_t'(1 << fbit), r);
      foreach (r[n]) begin
        checks++;
        if (y[n] !== r[n]) fail($sformatf("faulty layer 2 neuron %0d: got %0d expected %0d", n, y[n], r[n]));
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
