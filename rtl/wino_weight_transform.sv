// wino_weight_transform: U = GS g GS^T for a Pc x Pf group of 3x3 kernels.
//
// GS = 24*G is the integer form of the F(4x4,3x3) weight matrix, so U equals
// 576 times the textbook G g G^T and is exact; wino_output_transform removes
// the factor. Two constant-matrix products per kernel, combinational. The paper
// implements the non-power-of-two constants of this transform with LUT
// multipliers; here they are constant multiplications left to synthesis.
// Output width UW = DW + 10 holds |U| <= 576 * 2^(DW-1). The integer scaling is
// this design's choice; the paper does not say how it handles 1/6 and 1/24.
module wino_weight_transform
  import turf_pkg::*;
#(
  parameter int PC = 4,
  parameter int PF = 4
) (
  input  logic signed [DW-1:0] g [PC][PF][WK][WK],
  output logic signed [UW-1:0] u [PC][PF][TK][TK]
);
  always_comb begin
    for (int a = 0; a < PC; a++)
      for (int b = 0; b < PF; b++) begin
        logic signed [UW-1:0] t [TK][WK];
        // t = GS g   (6x3)
        for (int i = 0; i < TK; i++)
          for (int j = 0; j < WK; j++) begin
            t[i][j] = '0;
            for (int k = 0; k < WK; k++)
              t[i][j] = t[i][j] + UW'(GS[i][k]) * UW'(g[a][b][k][j]);
          end
        // u = t GS^T (6x6)
        for (int i = 0; i < TK; i++)
          for (int j = 0; j < TK; j++) begin
            u[a][b][i][j] = '0;
            for (int k = 0; k < WK; k++)
              u[a][b][i][j] = u[a][b][i][j] + t[i][k] * UW'(GS[j][k]);
          end
      end
  end
endmodule
