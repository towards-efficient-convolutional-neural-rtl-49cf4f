// tb_eltwise_add: random and overflowing operand pairs, with the addition on
// and off; the sum must saturate to the 16-bit range.
module tb_eltwise_add;
  logic en;
  logic signed [15:0] a, b, y;
  eltwise_add dut (.*);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      int va, vb, e;
      va = (t < 2) ? 30000 : $urandom_range(65535) - 32768;
      vb = (t == 0) ? 10000 : (t == 1) ? -20000 : $urandom_range(65535) - 32768;
      if (t == 2) begin va = -30000; vb = -10000; end
      en = (t % 4) != 3;
      a = 16'(va); b = 16'(vb); #1;
      e = en ? va + vb : va;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      checks++;
      if (int'(y) != e) begin failures++; $display("%0d + %0d -> %0d", va, vb, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
