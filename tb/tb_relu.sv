// tb_relu: random and corner values with the activation on and off.
module tb_relu;
  localparam int DW = 16;
  logic en;
  logic signed [DW-1:0] x, y;
  relu #(.DW(DW)) dut (.*);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      int v, e;
      v = (t == 0) ? -32768 : (t == 1) ? 32767 : (t == 2) ? 0 : (t == 3) ? -1 : $urandom_range(65535) - 32768;
      en = t[0] ^ t[3];
      x = 16'(v); #1;
      e = (en && v < 0) ? 0 : v;
      checks++;
      if (int'(y) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
