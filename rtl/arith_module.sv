// arith_module: the shared multiplier array of the accelerator.
//
// PC x PF x 36 signed multipliers. Operand a is per input-channel lane and is
// broadcast to all PF output lanes (the transformed input tile B^T d B, or the
// raw window in FC and pointwise layers); operand b is per (input, output) lane
// pair (the transformed weights, or the raw weights). lane_en switches off
// lane pairs that carry no work, such as the off-diagonal pairs of a depthwise
// layer or channels beyond the layer's channel count. The products feed the
// CONV adder tree (sum over input channels per tile position) and the FC adder
// tree (sum over all positions and channels), which is how the paper shares one
// arithmetic module among Winograd, plain and fully connected layers.
// Timing: one register stage, p and out_valid one cycle after in_valid.
module arith_module
  import turf_pkg::*;
#(
  parameter int PC = 4,
  parameter int PF = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [VW-1:0]  a [PC][TK2],
  input  logic signed [UW-1:0]  b [PC][PF][TK2],
  input  logic                  lane_en [PC][PF],
  output logic                  out_valid,
  output logic signed [PRW-1:0] p [PC][PF][TK2]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int i = 0; i < PC; i++)
        for (int j = 0; j < PF; j++)
          for (int k = 0; k < TK2; k++)
            p[i][j][k] <= lane_en[i][j] ? PRW'(a[i][k]) * PRW'(b[i][j][k]) : '0;
  end
endmodule
