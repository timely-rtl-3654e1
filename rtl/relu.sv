// relu: rectified linear unit on the sub-chip's output stream.
//
// y = max(0, x) when en is set, y = x otherwise. Combinational.
//
// Follows the paper: a ReLU stage between the shift-and-add and the pooling.
// Own choices: the bypass, the width.
module relu #(
  parameter int W = 16
) (
  input  logic                en,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  assign y = (en && x < 0) ? '0 : x;
endmodule
