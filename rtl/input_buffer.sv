// input_buffer: on-chip memory caching one input feature-map tile.
//
// A word holds PC channels of one pixel (the paper's Pc x Pw stream with
// Pw = 1). The address is (channel group, row, column):
//   addr = (c / PC) * H_MAX * W_MAX + y * W_MAX + x.
// The gather side writes one channel at a time through a per-lane write
// enable; the compute side reads a whole PC-channel word. Reads are
// synchronous: rd_data is valid one cycle after rd_en. Contents persist, so a
// tile is reused by every output-channel group that reads it.
module input_buffer #(
  parameter int DW    = 16,
  parameter int PC    = 4,
  parameter int C_MAX = 8,
  parameter int H_MAX = 10,
  parameter int W_MAX = 10,
  localparam int DEPTH = ((C_MAX + PC - 1) / PC) * H_MAX * W_MAX,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [PC-1:0]        wr_lane,
  input  logic signed [DW-1:0] wr_data,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic signed [DW-1:0] rd_data [PC]
);
  logic signed [DW-1:0] mem [DEPTH][PC];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int l = 0; l < PC; l++)
        if (wr_lane[l]) mem[wr_addr][l] <= wr_data;
    if (rd_en)
      for (int l = 0; l < PC; l++) rd_data[l] <= mem[rd_addr][l];
  end
endmodule
