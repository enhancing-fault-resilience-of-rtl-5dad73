// tb_inputs_buffer: self-checking test of the Inputs Buffer.
//
// Fills every word of the 4096-entry buffer with a value derived from its
// address, reads all back with the one-cycle read latency, then checks
// random overwrites against a shadow array held in the testbench.
module tb_inputs_buffer;
  import qnn_pkg::*;
  localparam int DEPTH = 4096;
  logic clk = 0, we = 0;
  logic [11:0] waddr = '0, raddr = '0;
  data_t wdata = '0, rdata;
  data_t shadow [DEPTH];
  int checks = 0, failures = 0;

  inputs_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd_check(int a);
    raddr = 12'(a); @(posedge clk); #1;
    checks++;
    if (rdata !== shadow[a]) begin
      failures++;
      if (failures < 10) $display("FAIL addr=%0d rdata=%0d exp=%0d", a, rdata, shadow[a]);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      shadow[a] = data_t'(a * 7 + (a >> 8));
      we = 1; waddr = 12'(a); wdata = shadow[a]; @(posedge clk); #1;
    end
    we = 0;
    for (int a = 0; a < DEPTH; a++) rd_check(a);
    for (int i = 0; i < 2000; i++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      shadow[a] = data_t'($urandom);
      we = 1; waddr = 12'(a); wdata = shadow[a]; @(posedge clk); #1; we = 0;
      rd_check($urandom_range(0, DEPTH - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
