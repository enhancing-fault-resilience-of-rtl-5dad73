// tb_pe: self-checking test of one multiply-accumulate PE.
//
// Runs 50 random dot products of random length with random bias, holding
// the accumulator still on idle cycles, and compares the accumulator with a
// sum computed in the testbench. Checks that load has priority over en and
// that the accumulator is updated one cycle after a MAC.
module tb_pe;
  import qnn_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, en = 0;
  acc_t bias = '0, acc;
  data_t x = '0, w = '0;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  task automatic expect_acc(acc_t e, string what);
    checks++;
    if (acc !== e) begin
      failures++;
      $display("FAIL %s acc=%0d exp=%0d", what, acc, e);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_t ref_sum;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    expect_acc('0, "reset");
    for (int t = 0; t < 50; t++) begin
      bias = acc_t'($urandom) >>> 12;
      load = 1; en = 1;          // load wins over en
      x = 8'sd100; w = 8'sd100;
      @(posedge clk); #1;
      load = 0; en = 0;
      expect_acc(bias, "load");
      ref_sum = bias;
      for (int k = 0, n = 1 + $urandom_range(0, 40); k < n; k++) begin
        x = data_t'($urandom); w = data_t'($urandom);
        en = ($urandom_range(0, 3) != 0);
        if (en) ref_sum = ref_sum + acc_t'(x) * acc_t'(w);
        @(posedge clk); #1;
        expect_acc(ref_sum, "mac");
      end
      en = 0;
    end
    // extremes
    load = 1; bias = '0; @(posedge clk); #1; load = 0;
    x = -8'sd128; w = -8'sd128; en = 1; @(posedge clk); #1; en = 0;
    expect_acc(acc_t'(16384), "-128*-128");
    x = 8'sd127; w = -8'sd128; en = 1; @(posedge clk); #1; en = 0;
    expect_acc(acc_t'(16384 - 16256), "+127*-128");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
