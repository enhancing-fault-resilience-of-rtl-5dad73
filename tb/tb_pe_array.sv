// tb_pe_array: self-checking test of the PE array (default 4x4).
//
// Loads random biases, streams K random inputs with a distinct random
// weight per PE, and compares every accumulator with a dot product computed
// in the testbench. Repeated for several K, including K = 1.
module tb_pe_array;
  import qnn_pkg::*;
  localparam int ROWS = 4, COLS = 4, N = ROWS * COLS;
  logic clk = 0, rst_n = 0, load = 0, en = 0;
  acc_t bias [N];
  data_t x = '0;
  data_t w [N];
  acc_t acc [N];
  acc_t expv [N];
  int checks = 0, failures = 0;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ks [4] = '{1, 7, 64, 300};
    foreach (w[p]) begin w[p] = '0; bias[p] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (ks[i]) begin
      foreach (bias[p]) begin
        bias[p] = acc_t'($signed($urandom_range(0, 20000)) - 10000);
        expv[p] = bias[p];
      end
      load = 1; @(posedge clk); #1; load = 0;
      for (int k = 0; k < ks[i]; k++) begin
        x = data_t'($urandom);
        foreach (w[p]) begin
          w[p] = data_t'($urandom);
          expv[p] += acc_t'(x) * acc_t'(w[p]);
        end
        en = 1; @(posedge clk); #1; en = 0;
      end
      foreach (acc[p]) begin
        checks++;
        if (acc[p] !== expv[p]) begin
          failures++;
          $display("FAIL K=%0d pe=%0d acc=%0d exp=%0d", ks[i], p, acc[p], expv[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
