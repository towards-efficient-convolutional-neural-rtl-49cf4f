// wino_output_transform: Y = (A^T X A) / 576 for PF Winograd-domain tiles.
//
// X is the 6x6 Hadamard-product tile already summed over input channels. Two
// constant-matrix products (constants 0, +-1, +-2, +-4, +-8) give the 4x4
// output tile, still scaled by 576 = 64 * 9 because the weights were
// transformed with 24*G. The factor is removed exactly: an arithmetic shift by
// 6, then a multiplication by the inverse of 9 modulo 2^ACCW, which returns the
// exact quotient of a value known to be a multiple of 9. Combinational.
// Follows the paper's A^T X A; the exact scaling is this design's choice.
module wino_output_transform
  import turf_pkg::*;
#(
  parameter int PF = 4,
  parameter int XW = PRW + 2
) (
  input  logic signed [XW-1:0]   x [PF][TK][TK],
  output logic signed [ACCW-1:0] y [PF][WM][WM]
);
  always_comb begin
    for (int b = 0; b < PF; b++) begin
      logic signed [63:0] t [WM][TK];
      logic signed [63:0] s;
      for (int i = 0; i < WM; i++)
        for (int j = 0; j < TK; j++) begin
          t[i][j] = '0;
          for (int k = 0; k < TK; k++)
            t[i][j] = t[i][j] + 64'(AT[i][k]) * 64'(x[b][k][j]);
        end
      for (int i = 0; i < WM; i++)
        for (int j = 0; j < WM; j++) begin
          logic [ACCW-1:0] q;
          s = '0;
          for (int k = 0; k < TK; k++)
            s = s + t[i][k] * 64'(AT[j][k]);
          q = ACCW'(s >>> 6) * INV9;
          y[b][i][j] = signed'(q);
        end
    end
  end
endmodule
