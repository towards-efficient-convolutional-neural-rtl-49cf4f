// tb_wino_output_transform: end-to-end check of the Winograd identity. For a
// random 6x6 input tile d and 3x3 kernel g per lane, the Winograd-domain tile
// X = (24G g (24G)^T) .* (B^T d B) is formed here with matrices written out in
// the testbench; the block must turn X into exactly the 4x4 direct
// correlation of d with g (Eq. 1), removing the 576 scale.
module tb_wino_output_transform;
  import turf_pkg::*;
  localparam int PF = 2, XW = PRW + 2;
  logic signed [XW-1:0] x [PF][TK][TK];
  logic signed [ACCW-1:0] y [PF][WM][WM];
  wino_output_transform #(.PF(PF), .XW(XW)) dut (.*);
  int checks = 0, failures = 0;
  int bt [6][6] = '{'{4,0,-5,0,1,0}, '{0,-4,-4,1,1,0}, '{0,4,-4,-1,1,0},
                    '{0,-2,-1,2,1,0}, '{0,2,-1,-2,1,0}, '{0,4,0,-5,0,1}};
  int gs [6][3] = '{'{6,0,0}, '{-4,-4,-4}, '{-4,4,-4}, '{1,2,4}, '{1,-2,4}, '{0,0,24}};
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      longint d [PF][6][6], g [PF][3][3];
      for (int l = 0; l < PF; l++) begin
        longint tv [6][6], vv [6][6], tu [6][3], uu [6][6];
        for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++)
          d[l][i][j] = (t == 0) ? 32767 : (t == 1) ? -32768 : longint'($urandom_range(65535)) - 32768;
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
          g[l][i][j] = (t == 0) ? -32768 : (t == 1) ? -32768 : longint'($urandom_range(65535)) - 32768;
        for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
          tv[i][j] = 0; for (int k = 0; k < 6; k++) tv[i][j] += bt[i][k] * d[l][k][j];
        end
        for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
          vv[i][j] = 0; for (int k = 0; k < 6; k++) vv[i][j] += tv[i][k] * bt[j][k];
        end
        for (int i = 0; i < 6; i++) for (int j = 0; j < 3; j++) begin
          tu[i][j] = 0; for (int k = 0; k < 3; k++) tu[i][j] += gs[i][k] * g[l][k][j];
        end
        for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
          uu[i][j] = 0; for (int k = 0; k < 3; k++) uu[i][j] += tu[i][k] * gs[j][k];
          x[l][i][j] = XW'(uu[i][j] * vv[i][j]);
        end
      end
      #1;
      for (int l = 0; l < PF; l++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) begin
            longint e;
            e = 0;
            for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) e += d[l][i+a][j+b] * g[l][a][b];
            checks++;
            if (longint'(y[l][i][j]) != e) begin
              failures++;
              if (failures < 5) $display("t%0d (%0d,%0d) got %0d exp %0d", t, i, j, y[l][i][j], e);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
