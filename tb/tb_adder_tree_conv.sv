// tb_adder_tree_conv: random products (including extreme values) on three
// input lanes and two output lanes; each of the 36 outputs per lane must be the
// sum over the input lanes, computed here.
module tb_adder_tree_conv;
  import turf_pkg::*;
  localparam int PC = 3, PF = 2, XW = PRW + 2;
  logic signed [PRW-1:0] p [PC][PF][TK2];
  logic signed [XW-1:0] x [PF][TK][TK];
  adder_tree_conv #(.PC(PC), .PF(PF), .XW(XW)) dut (.*);
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
        v[c][f][k] = (t == 0) ? -(longint'(1) <<< (PRW - 1)) :
                     (longint'($urandom) <<< 17) ^ longint'($urandom);
        v[c][f][k] = (v[c][f][k] <<< (64 - PRW)) >>> (64 - PRW);   // sign-extend PRW bits
        p[c][f][k] = PRW'(v[c][f][k]);
      end
      #1;
      for (int f = 0; f < PF; f++)
        for (int k = 0; k < TK2; k++) begin
          longint e;
          e = 0;
          for (int c = 0; c < PC; c++) e += v[c][f][k];
          checks++;
          if (longint'(x[f][k / TK][k % TK]) != e) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
