// tb_arith_module: random operands and lane enables on a 2x3 array; every
// product must appear one cycle after in_valid (zero for disabled lane pairs),
// hold while in_valid is low, and out_valid must follow in_valid by one cycle.
module tb_arith_module;
  import turf_pkg::*;
  localparam int PC = 2, PF = 3;
  logic clk = 0, rst_n = 0, in_valid = 0;
  always #5 clk = ~clk;
  logic signed [VW-1:0] a [PC][TK2];
  logic signed [UW-1:0] b [PC][PF][TK2];
  logic lane_en [PC][PF];
  logic out_valid;
  logic signed [PRW-1:0] p [PC][PF][TK2];
  arith_module #(.PC(PC), .PF(PF)) dut (.*);
  int checks = 0, failures = 0;
  longint ea [PC][TK2], eb [PC][PF][TK2];
  bit en [PC][PF];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (a[i, k]) a[i][k] = 0;
    foreach (b[i, j, k]) b[i][j][k] = 0;
    foreach (lane_en[i, j]) lane_en[i][j] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      bit hold;
      hold = (t % 5 == 4);
      @(negedge clk);
      in_valid = !hold;
      if (!hold) begin
        foreach (a[i, k]) begin ea[i][k] = longint'($urandom_range(8000000)) - 4000000; a[i][k] = VW'(ea[i][k]); end
        foreach (b[i, j, k]) begin eb[i][j][k] = longint'($urandom_range(60000000)) - 30000000; b[i][j][k] = UW'(eb[i][j][k]); end
        foreach (lane_en[i, j]) begin en[i][j] = $urandom_range(3) != 0; lane_en[i][j] = en[i][j]; end
      end else begin
        foreach (a[i, k]) a[i][k] = 1;   // must not be taken
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid != !hold) failures++;
      foreach (p[i, j, k]) begin
        longint e;
        e = en[i][j] ? ea[i][k] * eb[i][j][k] : 0;
        checks++;
        if (longint'(p[i][j][k]) != e) begin
          failures++;
          if (failures < 5) $display("t%0d (%0d,%0d,%0d) got %0d exp %0d", t, i, j, k, p[i][j][k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
