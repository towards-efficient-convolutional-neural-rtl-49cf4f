// adder_tree_fc: the FC adder tree. For every output lane f, sums all PC x 36
// products of one window: y[f] = sum_c sum_pos p[c][f][pos]. In a fully
// connected layer the 36 positions of a 6x6 input window and the PC channel
// lanes form one dot product of length 36*PC per output neuron. Combinational,
// one adder_tree of PC*36 operands per output lane. The paper names the block
// and says dot products are multipliers followed by an adder tree.
module adder_tree_fc
  import turf_pkg::*;
#(
  parameter int PC = 4,
  parameter int PF = 4,
  parameter int OW = PRW + $clog2(PC * TK2)
) (
  input  logic signed [PRW-1:0] p [PC][PF][TK2],
  output logic signed [OW-1:0]  y [PF]
);
  for (genvar f = 0; f < PF; f++) begin : g_f
    logic signed [PRW-1:0] ops [PC*TK2];
    for (genvar c = 0; c < PC; c++) begin : g_c
      for (genvar k = 0; k < TK2; k++) begin : g_k
        assign ops[c*TK2 + k] = p[c][f][k];
      end
    end
    adder_tree #(.N(PC*TK2), .IW(PRW), .OW(OW)) u_tree (.in(ops), .sum(y[f]));
  end
endmodule
