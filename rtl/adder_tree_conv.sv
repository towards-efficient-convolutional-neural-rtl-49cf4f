// adder_tree_conv: the CONV adder tree. For every output lane f and every one
// of the 36 Winograd-domain positions, sums the products of the PC input
// channel lanes: x[f][pos] = sum_c p[c][f][pos]. The result is the channel-summed
// Hadamard tile that the output transform turns into a 4x4 output tile; in a
// pointwise layer only position 0 carries data. Combinational, one adder_tree of
// PC operands per (f, pos). The paper names the block; its structure (a tree over
// the input-channel lanes) is this design's reading of "dot-product".
module adder_tree_conv
  import turf_pkg::*;
#(
  parameter int PC = 4,
  parameter int PF = 4,
  parameter int XW = PRW + 2
) (
  input  logic signed [PRW-1:0] p [PC][PF][TK2],
  output logic signed [XW-1:0]  x [PF][TK][TK]
);
  for (genvar f = 0; f < PF; f++) begin : g_f
    for (genvar k = 0; k < TK2; k++) begin : g_k
      logic signed [PRW-1:0] ops [PC];
      for (genvar c = 0; c < PC; c++) begin : g_c
        assign ops[c] = p[c][f][k];
      end
      adder_tree #(.N(PC), .IW(PRW), .OW(XW)) u_tree (.in(ops), .sum(x[f][k / TK][k % TK]));
    end
  end
endmodule
