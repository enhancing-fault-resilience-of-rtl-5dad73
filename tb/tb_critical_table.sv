// tb_critical_table: self-checking test of the critical-neuron table.
//
// Writes all 1024 address pairs, reads them back with one-cycle latency and
// checks both fields of each entry against a shadow copy, then checks
// random rewrites.
module tb_critical_table;
  import qnn_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0, we = 0;
  logic [9:0] waddr = '0, raddr = '0;
  crit_pair_t wdata = '0, rdata;
  crit_pair_t shadow [DEPTH];
  int checks = 0, failures = 0;

  critical_table #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd_check(int a);
    raddr = 10'(a); @(posedge clk); #1;
    checks++;
    if (rdata.addr_a !== shadow[a].addr_a || rdata.addr_b !== shadow[a].addr_b) begin
      failures++;
      if (failures < 10) $display("FAIL entry=%0d got=%h exp=%h", a, rdata, shadow[a]);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      shadow[a].addr_a = 16'(2 * a);
      shadow[a].addr_b = 16'($urandom);
      we = 1; waddr = 10'(a); wdata = shadow[a]; @(posedge clk); #1;
    end
    we = 0;
    for (int a = 0; a < DEPTH; a++) rd_check(a);
    for (int i = 0; i < 500; i++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      shadow[a] = crit_pair_t'($urandom);
      we = 1; waddr = 10'(a); wdata = shadow[a]; @(posedge clk); #1; we = 0;
      rd_check(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
