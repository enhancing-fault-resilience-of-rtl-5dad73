// tb_act_unit: self-checking test of the activation unit.
//
// Directed corner cases and 20000 random accumulators against a model that
// divides by 2^shift rounding toward minus infinity (floor, computed with
// integer division and a correction instead of a shift), applies ReLU when
// enabled and clips to [-128, 127]; the saturation flag is checked too.
// With pooling enabled the result must be the larger of that value and the
// stored one.
module tb_act_unit;
  import qnn_pkg::*;
  acc_t acc;
  logic [4:0] shift;
  logic relu_en, saturated, pool_en;
  data_t prev;
  data_t y;
  int checks = 0, failures = 0;

  act_unit dut (.*);

  task automatic check(longint a, int sh, bit relu, bit pool = 0, int pv = 0);
    longint q, d;
    logic exp_sat;
    d = longint'(1) << sh;
    q = a / d;
    if ((a % d != 0) && (a < 0)) q = q - 1;   // floor
    if (relu && q < 0) q = 0;
    exp_sat = (q > 127) || (q < -128);
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    if (pool && pv > q) q = pv;
    acc = acc_t'(a); shift = 5'(sh); relu_en = relu; pool_en = pool; prev = data_t'(pv); #1;
    checks++;
    if (y !== data_t'(q) || saturated !== exp_sat) begin
      failures++;
      if (failures < 10)
        $display("FAIL acc=%0d sh=%0d relu=%0d y=%0d sat=%0d exp=%0d/%0d",
                 a, sh, relu, y, saturated, q, exp_sat);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pool_en = 0; prev = '0;
    check(0, 0, 0); check(127, 0, 0); check(128, 0, 0); check(-128, 0, 0);
    check(-129, 0, 0); check(-5, 0, 1); check(-5, 1, 0); check(255, 1, 0);
    check(256, 1, 0); check(-64'sd2147483648, 31, 0); check(2147483647, 24, 0);
    check(2147483647, 0, 1); check(-64'sd2147483648, 0, 1);
    for (int i = 0; i < 20000; i++) begin
      int a;
      a = $signed($urandom);
      if (i % 2) a = a >>> $urandom_range(0, 24);
      check(longint'(a), $urandom_range(0, 31), 1'($urandom));
    end
    // max pooling against the value already stored
    check(50, 0, 1, 1, 60); check(50, 0, 1, 1, 40); check(-7, 0, 0, 1, -9); check(-7, 0, 1, 1, -9);
    for (int i = 0; i < 5000; i++)
      check(longint'($signed($urandom) >>> 20), $urandom_range(0, 4), 1'($urandom), 1'b1,
            $signed($urandom_range(0, 255)) - 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
