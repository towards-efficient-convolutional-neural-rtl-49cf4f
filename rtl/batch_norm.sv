// batch_norm: per-channel normalisation and requantisation of layer outputs.
//
// Inference-time batch normalisation folds into a per-output-channel scale
// gamma and bias beta (both 16-bit fixed point):
//   y = sat16( ((x * gamma) >>> shift) + beta )      when en = 1
//   y = sat16(   x          >>> shift        )      when en = 0
// where x is a 48-bit accumulator value. shift moves the binary point back to
// the 16-bit data format; the arithmetic shift rounds toward minus infinity and
// sat16 saturates. gamma and beta are written through a small register-file
// port; the datapath is combinational. The paper only names the module; the
// folded form, rounding and saturation are this design's choices.
module batch_norm
  import turf_pkg::*;
#(
  parameter int F_MAX = 8
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic                   wr_beta,   // 0: gamma, 1: beta
  input  logic [7:0]             wr_idx,
  input  logic signed [DW-1:0]   wr_data,
  input  logic                   en,
  input  logic [5:0]             shift,
  input  logic [7:0]             ch,
  input  logic signed [ACCW-1:0] x,
  output logic signed [DW-1:0]   y
);
  logic signed [DW-1:0] gamma [F_MAX];
  logic signed [DW-1:0] beta  [F_MAX];

  always_ff @(posedge clk)
    if (wr_en && int'(wr_idx) < F_MAX) begin
      if (wr_beta) beta[wr_idx]  <= wr_data;
      else         gamma[wr_idx] <= wr_data;
    end

  always_comb begin
    logic signed [63:0] t;
    logic signed [DW-1:0] g, b;
    g = (int'(ch) < F_MAX) ? gamma[ch] : '0;
    b = (int'(ch) < F_MAX) ? beta[ch]  : '0;
    if (en) t = ((64'(x) * 64'(g)) >>> shift) + 64'(b);
    else    t = 64'(x) >>> shift;
    y = sat_dw(t);
  end
endmodule
