// tb_outputs_buffer: self-checking test of the Outputs Buffer.
//
// Writes every word, then reads through both read ports at once (different
// addresses) with one-cycle latency, and checks that a port-A read of the
// word being written in the same cycle returns the old value while the next
// read returns the new one. Expected values come from a shadow array.
module tb_outputs_buffer;
  import qnn_pkg::*;
  localparam int DEPTH = 8192;
  logic clk = 0, we = 0;
  logic [12:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  data_t wdata = '0, rdata_a, rdata_b;
  data_t shadow [DEPTH];
  int checks = 0, failures = 0;

  outputs_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(data_t got, data_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      shadow[a] = data_t'($urandom);
      we = 1; waddr = 13'(a); wdata = shadow[a]; @(posedge clk); #1;
    end
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr_a = 13'(a); raddr_b = 13'(DEPTH - 1 - a); @(posedge clk); #1;
      expect_eq(rdata_a, shadow[a], "port A");
      expect_eq(rdata_b, shadow[DEPTH - 1 - a], "port B");
    end
    for (int i = 0; i < 500; i++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      automatic data_t old = shadow[a];
      shadow[a] = data_t'($urandom);
      we = 1; waddr = 13'(a); wdata = shadow[a]; raddr_a = 13'(a); raddr_b = 13'(a);
      @(posedge clk); #1; we = 0;
      expect_eq(rdata_a, old, "read during write");
      @(posedge clk); #1;
      expect_eq(rdata_a, shadow[a], "read after write A");
      expect_eq(rdata_b, shadow[a], "read after write B");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
