// eltwise_add: element-wise addition of two identically sized feature maps,
// the shortcut '+' of stacked, bottleneck and separable bottleneck blocks.
// y = sat16(a + b) when en = 1, else y = a. Both maps arrive in the same order,
// one element per call, so the module is a saturating adder. Saturation is
// this design's choice. Combinational.
module eltwise_add
  import turf_pkg::*;
(
  input  logic                 en,
  input  logic signed [DW-1:0] a,
  input  logic signed [DW-1:0] b,
  output logic signed [DW-1:0] y
);
  assign y = en ? sat_dw(64'(a) + 64'(b)) : a;
endmodule
