// relu: the non-linear activation module. y = max(x, 0) when en = 1, else
// y = x (the separable bottleneck drops the activation after its last layer).
// Combinational.
module relu #(
  parameter int DW = 16
) (
  input  logic                 en,
  input  logic signed [DW-1:0] x,
  output logic signed [DW-1:0] y
);
  assign y = (en && x < 0) ? '0 : x;
endmodule
