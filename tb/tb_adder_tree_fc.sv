// tb_adder_tree_fc: random products on two input lanes and three output lanes;
// each output must be the sum of all 2 x 36 products of its lane.
module tb_adder_tree_fc;
  import turf_pkg::*;
  localparam int PC = 2, PF = 3, OW = PRW + $clog2(PC * TK2);
  logic signed [PRW-1:0] p [PC][PF][TK2];
  logic signed [OW-1:0] y [PF];
  adder_tree_fc #(.PC(PC), .PF(PF), .OW(OW)) dut (.*);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 100; t++) begin
      longint v [PC][PF][TK2];
      foreach (p[c, f, k]) begin
        v[c][f][k] = (t == 0) ? (longint'(1) <<< 40) : longint'($urandom) - (longint'(1) <<< 31);
        p[c][f][k] = PRW'(v[c][f][k]);
      end
      #1;
      for (int f = 0; f < PF; f++) begin
        longint e;
        e = 0;
        for (int c = 0; c < PC; c++) for (int k = 0; k < TK2; k++) e += v[c][f][k];
        checks++;
        if (longint'(y[f]) != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
