// wino_input_transform: V = B^T d B for LANES (Pc) input tiles of Tk x Tk.
//
// Each transform is two products with the constant matrix B^T (first along the
// columns, then along the rows). The constants of F(4x4,3x3) are 0, +-1, +-2,
// +-4 and +-5, so every product is a shift or a shift-and-add; they are written
// as constant multiplications and left to synthesis. Purely combinational.
// The output width VW = DW + 7 holds the worst case |V| <= 100 * 2^(DW-1).
// Follows the paper's Winograd formulation; the matrix values are the standard
// ones of F(4x4,3x3), which the paper names but does not print.
module wino_input_transform
  import turf_pkg::*;
#(
  parameter int LANES = 4
) (
  input  logic signed [DW-1:0] d [LANES][TK][TK],
  output logic signed [VW-1:0] v [LANES][TK][TK]
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [VW-1:0] t [TK][TK];
      // t = B^T d
      for (int i = 0; i < TK; i++)
        for (int j = 0; j < TK; j++) begin
          t[i][j] = '0;
          for (int k = 0; k < TK; k++)
            t[i][j] = t[i][j] + VW'(BT[i][k]) * VW'(d[l][k][j]);
        end
      // v = t B = t (B^T)^T
      for (int i = 0; i < TK; i++)
        for (int j = 0; j < TK; j++) begin
          v[l][i][j] = '0;
          for (int k = 0; k < TK; k++)
            v[l][i][j] = v[l][i][j] + t[i][k] * VW'(BT[j][k]);
        end
    end
  end
endmodule
