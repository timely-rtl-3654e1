// shift_add: the shifter and adder that rebuild an 8-bit-weight dot product.
//
// An 8-bit weight is split over two adjacent crossbar columns: the upper WBITS
// bits in one, the lower WBITS bits in the other. Their TDC codes are joined as
//   y = (msb << WBITS) + lsb + bias
// and the result saturates to the signed W-bit range. Purely combinational.
//
// Follows the paper: sub-ranging with the 4 MSBs and 4 LSBs of each weight in
// adjacent columns, results combined by the shifter and adder. Own choices:
// the left shift by WBITS with equal charging capacitors on both columns (the
// paper gives the LSB column half the capacitor), and one signed bias per layer
// added here (the bias term of the convolution is not placed by the paper).
module shift_add #(
  parameter int DBITS = 8,
  parameter int WBITS = 4,
  parameter int W     = 16
) (
  input  logic [DBITS-1:0]     msb,
  input  logic [DBITS-1:0]     lsb,
  input  logic signed [W-1:0]  bias,
  output logic signed [W-1:0]  y
);
  localparam int XW = W + 2;
  localparam logic signed [XW-1:0] YMAX = XW'((1 << (W - 1)) - 1);
  localparam logic signed [XW-1:0] YMIN = -XW'(1 << (W - 1));
  logic signed [XW-1:0] s;

  always_comb begin
    s = (XW'(msb) <<< WBITS) + XW'(lsb) + XW'(bias);
    if (s > YMAX)      y = W'(YMAX);
    else if (s < YMIN) y = W'(YMIN);
    else               y = W'(s);
  end
endmodule
