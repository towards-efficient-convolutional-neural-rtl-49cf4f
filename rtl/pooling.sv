// pooling: 2x2, stride-2 max or average pooling over a streamed feature map.
//
// Elements arrive one per in_valid, channel plane by channel plane, row-major,
// with their (row, col) in the plane. A row of W_MAX/2 partial results holds
// the running max or sum of each 2x2 window; the window is complete on the
// odd-row, odd-column element, and the module then raises out_valid in the same
// cycle (combinational) with the maximum, or the sum shifted right by 2 (the
// average rounded toward minus infinity). With en = 0 every element passes
// straight through. Partial results update on in_valid. The paper names "max
// or average pooling"; window size, stride and rounding are this design's.
module pooling #(
  parameter int DW    = 16,
  parameter int W_MAX = 10
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic                 avg,
  input  logic                 in_valid,
  input  logic [7:0]           in_row,
  input  logic [7:0]           in_col,
  input  logic signed [DW-1:0] in_data,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data
);
  localparam int PW = (W_MAX + 1) / 2;
  logic signed [DW+1:0] part [PW];
  logic signed [DW+1:0] prev, comb_v;
  logic first;
  int unsigned idx;

  always_comb begin
    idx   = int'(in_col >> 1);
    first = !in_row[0] && !in_col[0];
    prev  = (idx < PW) ? part[idx] : '0;
    if (first)    comb_v = (DW+2)'(in_data);
    else if (avg) comb_v = prev + (DW+2)'(in_data);
    else          comb_v = ((DW+2)'(in_data) > prev) ? (DW+2)'(in_data) : prev;
  end

  always_ff @(posedge clk)
    if (in_valid && en && idx < PW) part[idx] <= comb_v;

  assign out_valid = in_valid && (!en || (in_row[0] && in_col[0]));
  assign out_data  = !en ? in_data : (avg ? DW'(comb_v >>> 2) : DW'(comb_v));
endmodule
