// adder_tree: combinational balanced binary adder tree of N signed operands.
//
// Operands are sign-extended to OW bits and summed pairwise level by level
// (ceil(log2 N) levels); an odd operand passes to the next level unchanged.
// Helper used by the CONV and FC adder trees.
module adder_tree #(
  parameter int N  = 4,
  parameter int IW = 16,
  parameter int OW = IW + $clog2(N)
) (
  input  logic signed [IW-1:0] in [N],
  output logic signed [OW-1:0] sum
);
  localparam int LV = (N <= 1) ? 1 : $clog2(N) + 1;

  always_comb begin
    logic signed [OW-1:0] lvl [LV][N];
    int n;
    for (int l = 0; l < LV; l++)
      for (int i = 0; i < N; i++) lvl[l][i] = '0;
    for (int i = 0; i < N; i++) lvl[0][i] = OW'(in[i]);
    n = N;
    for (int l = 1; l < LV; l++) begin
      for (int i = 0; i < (n + 1) / 2; i++)
        lvl[l][i] = (2 * i + 1 < n) ? lvl[l-1][2*i] + lvl[l-1][2*i+1] : lvl[l-1][2*i];
      n = (n + 1) / 2;
    end
    sum = lvl[LV-1][0];
  end
endmodule
