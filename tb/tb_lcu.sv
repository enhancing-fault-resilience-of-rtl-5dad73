// tb_lcu: self-checking test of the Lightweight Correction Unit.
//
// Checks the worked example of the design notes (inp1 = 11010101,
// inp2 = 11010001 -> out = 10010001), then exhaustively all 65536 input
// pairs against an independent per-bit model: bit i of the output is 1 only
// if i != 6 and both inputs have bit i set. Finally checks fault masking on
// split pairs: for a non-negative split value v < 64 (bit 6 clear) any
// single 0->1 flip in either copy is removed.
module tb_lcu;
  logic [7:0] inp1, inp2, out;
  int checks = 0, failures = 0;

  lcu dut (.inp1, .inp2, .out);

  function automatic logic [7:0] model(logic [7:0] a, logic [7:0] b);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = (i == 6) ? 1'b0 : (a[i] && b[i]);
    return r;
  endfunction

  task automatic check(logic [7:0] a, logic [7:0] b, logic [7:0] exp);
    inp1 = a; inp2 = b; #1;
    checks++;
    if (out !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL inp1=%b inp2=%b out=%b exp=%b", a, b, out, exp);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(8'b11010101, 8'b11010001, 8'b10010001);
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++)
        check(8'(a), 8'(b), model(8'(a), 8'(b)));
    // single 0->1 upsets on one split of a fault-free pair are masked
    for (int v = 0; v < 64; v++)
      for (int bit_i = 0; bit_i < 8; bit_i++)
        if (!v[bit_i]) begin
          check(8'(v) | (8'd1 << bit_i), 8'(v), 8'(v));
          check(8'(v), 8'(v) | (8'd1 << bit_i), 8'(v));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
