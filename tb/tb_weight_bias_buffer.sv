// tb_weight_bias_buffer: self-checking test of the Weights/Bias Buffer.
//
// Writes weights lane by lane into random words and biases into every bias
// word, then reads whole words (all 16 lanes) with one-cycle latency and
// compares each lane with a shadow copy. A lane write must leave the other
// lanes of the word unchanged.
module tb_weight_bias_buffer;
  import qnn_pkg::*;
  localparam int LANES = 16, WDEPTH = 4096, BDEPTH = 256;
  logic clk = 0, w_we = 0, b_we = 0;
  logic [11:0] w_waddr = '0, w_raddr = '0;
  logic [7:0]  b_waddr = '0, b_raddr = '0;
  logic [3:0]  w_lane = '0, b_lane = '0;
  data_t w_wdata = '0;
  acc_t  b_wdata = '0;
  data_t w_rdata [LANES];
  acc_t  b_rdata [LANES];
  data_t wsh [WDEPTH][LANES];
  acc_t  bsh [BDEPTH][LANES];
  int checks = 0, failures = 0;

  weight_bias_buffer #(.LANES(LANES), .WDEPTH(WDEPTH), .BDEPTH(BDEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // words 0..255 are fully written, then read back
    for (int a = 0; a < 256; a++)
      for (int l = 0; l < LANES; l++) begin
        wsh[a][l] = data_t'($urandom);
        bsh[a][l] = acc_t'($urandom);
        w_we = 1; w_waddr = 12'(a); w_lane = 4'(l); w_wdata = wsh[a][l];
        b_we = 1; b_waddr = 8'(a);  b_lane = 4'(l); b_wdata = bsh[a][l];
        @(posedge clk); #1;
      end
    w_we = 0; b_we = 0;
    // rewrite one lane of some words; other lanes keep their values
    for (int i = 0; i < 100; i++) begin
      automatic int a = $urandom_range(0, 255), l = $urandom_range(0, LANES - 1);
      wsh[a][l] = data_t'($urandom);
      w_we = 1; w_waddr = 12'(a); w_lane = 4'(l); w_wdata = wsh[a][l];
      @(posedge clk); #1; w_we = 0;
    end
    // high weight addresses too
    for (int l = 0; l < LANES; l++) begin
      wsh[WDEPTH-1][l] = data_t'(l - 8);
      w_we = 1; w_waddr = 12'(WDEPTH - 1); w_lane = 4'(l); w_wdata = wsh[WDEPTH-1][l];
      @(posedge clk); #1;
    end
    w_we = 0;
    for (int a = 0; a < 257; a++) begin
      automatic int wa = (a == 256) ? WDEPTH - 1 : a;
      w_raddr = 12'(wa); b_raddr = 8'(a); @(posedge clk); #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (w_rdata[l] !== wsh[wa][l]) begin
          failures++;
          if (failures < 10) $display("FAIL w[%0d][%0d]=%0d exp=%0d", wa, l, w_rdata[l], wsh[wa][l]);
        end
        if (a < 256) begin
          checks++;
          if (b_rdata[l] !== bsh[a][l]) begin
            failures++;
            if (failures < 10) $display("FAIL b[%0d][%0d]=%0d exp=%0d", a, l, b_rdata[l], bsh[a][l]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
