// weight_register: on-chip store of a layer's filter weights.
//
// Holds F_MAX x C_MAX kernels of up to 36 taps (3x3 kernels use taps 0..8 in
// row-major order, pointwise kernels tap 0, FC weights all 36 taps of a 6x6
// window). Written one weight at a time by the gather logic; the read side
// presents the whole PC x PF group starting at (rd_c, rd_f) at once, so the
// weight transform and the multiplier array see every kernel of the current
// channel-group pair in parallel. Reads are combinational. Lanes beyond the
// stored range read zero. The paper names the block only.
module weight_register
  import turf_pkg::*;
#(
  parameter int PC    = 4,
  parameter int PF    = 4,
  parameter int C_MAX = 8,
  parameter int F_MAX = 8
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [7:0]           wr_f,
  input  logic [7:0]           wr_c,
  input  logic [5:0]           wr_k,
  input  logic signed [DW-1:0] wr_data,
  input  logic [7:0]           rd_f,
  input  logic [7:0]           rd_c,
  output logic signed [DW-1:0] rd_w [PC][PF][TK2]
);
  logic signed [DW-1:0] mem [F_MAX][C_MAX][TK2];

  always_ff @(posedge clk)
    if (wr_en && int'(wr_f) < F_MAX && int'(wr_c) < C_MAX && int'(wr_k) < TK2)
      mem[wr_f][wr_c][wr_k] <= wr_data;

  always_comb
    for (int c = 0; c < PC; c++)
      for (int f = 0; f < PF; f++)
        for (int k = 0; k < TK2; k++) begin
          int unsigned fi, ci;
          fi = int'(rd_f) + f;
          ci = int'(rd_c) + c;
          rd_w[c][f][k] = (fi < F_MAX && ci < C_MAX) ? mem[fi][ci][k] : '0;
        end
endmodule
