// tb_wino_weight_transform: random 3x3 kernels (and the extreme values) on a
// 2x2 lane group; the reference is 576 * G g G^T computed here in real
// arithmetic from the textbook G of F(4x4,3x3) (fractions 1/4, 1/6, 1/12,
// 1/24), which must be an exact integer equal to the design's output.
module tb_wino_weight_transform;
  import turf_pkg::*;
  localparam int PC = 2, PF = 2;
  logic signed [DW-1:0] g [PC][PF][WK][WK];
  logic signed [UW-1:0] u [PC][PF][TK][TK];
  wino_weight_transform #(.PC(PC), .PF(PF)) dut (.*);
  int checks = 0, failures = 0;
  real gm [6][3] = '{'{0.25, 0.0, 0.0}, '{-1.0/6, -1.0/6, -1.0/6}, '{-1.0/6, 1.0/6, -1.0/6},
                     '{1.0/24, 1.0/12, 1.0/6}, '{1.0/24, -1.0/12, 1.0/6}, '{0.0, 0.0, 1.0}};
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      foreach (g[a, b, i, j])
        g[a][b][i][j] = (t == 0) ? 16'sh7fff : (t == 1) ? 16'sh8000 : 16'($urandom_range(65535));
      #1;
      foreach (g[a, b, i0, j0]) if (i0 == 0 && j0 == 0) begin
        real rt [6][3];
        for (int i = 0; i < 6; i++)
          for (int j = 0; j < 3; j++) begin
            rt[i][j] = 0.0;
            for (int k = 0; k < 3; k++) rt[i][j] += gm[i][k] * real'(g[a][b][k][j]);
          end
        for (int i = 0; i < 6; i++)
          for (int j = 0; j < 6; j++) begin
            real r; longint e;
            r = 0.0;
            for (int k = 0; k < 3; k++) r += rt[i][k] * gm[j][k];
            e = longint'($rtoi(r * 576.0 + (r >= 0 ? 0.5 : -0.5)));
            checks++;
            if (longint'(u[a][b][i][j]) != e) begin
              failures++;
              if (failures < 5) $display("(%0d,%0d) got %0d exp %0d", i, j, u[a][b][i][j], e);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
