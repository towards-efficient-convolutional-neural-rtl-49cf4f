// output_buffer: on-chip memory that stores and accumulates partial sums.
//
// Holds F_MAX x H_MAX x W_MAX accumulators of ACCW bits. The accumulate port
// adds a PF-channel block of BLK x BLK values (a 4x4 Winograd output tile per
// output channel) at (acc_f, acc_y, acc_x) in one cycle; acc_one restricts the
// update to the block's (0,0) element, for pointwise and FC layers that produce
// one value per channel. acc_lane masks output lanes. Across input-channel
// groups the same location is accumulated again, which is how the partial
// sums of a layer whose channels exceed Pc are built. clear zeroes the whole
// buffer in one cycle; the read port is combinational (used while draining).
// The paper gives the function; the banked block-wide port is this design's.
module output_buffer
  import turf_pkg::*;
#(
  parameter int PF    = 4,
  parameter int BLK   = 4,
  parameter int F_MAX = 8,
  parameter int H_MAX = 10,
  parameter int W_MAX = 10
) (
  input  logic                   clk,
  input  logic                   clear,
  input  logic                   acc_en,
  input  logic                   acc_one,
  input  logic [PF-1:0]          acc_lane,
  input  logic [7:0]             acc_f,
  input  logic [7:0]             acc_y,
  input  logic [7:0]             acc_x,
  input  logic signed [ACCW-1:0] acc_data [PF][BLK][BLK],
  input  logic [7:0]             rd_f,
  input  logic [7:0]             rd_y,
  input  logic [7:0]             rd_x,
  output logic signed [ACCW-1:0] rd_data
);
  logic signed [ACCW-1:0] mem [F_MAX][H_MAX][W_MAX];

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int f = 0; f < F_MAX; f++)
        for (int y = 0; y < H_MAX; y++)
          for (int x = 0; x < W_MAX; x++) mem[f][y][x] <= '0;
    end else if (acc_en) begin
      for (int l = 0; l < PF; l++)
        for (int i = 0; i < BLK; i++)
          for (int j = 0; j < BLK; j++) begin
            int unsigned ff, yy, xx;
            ff = int'(acc_f) + l;
            yy = int'(acc_y) + i;
            xx = int'(acc_x) + j;
            if (acc_lane[l] && (!acc_one || (i == 0 && j == 0)) &&
                ff < F_MAX && yy < H_MAX && xx < W_MAX)
              mem[ff][yy][xx] <= mem[ff][yy][xx] + acc_data[l][i][j];
          end
    end
  end

  assign rd_data = (int'(rd_f) < F_MAX && int'(rd_y) < H_MAX && int'(rd_x) < W_MAX)
                   ? mem[rd_f][rd_y][rd_x] : '0;
endmodule
