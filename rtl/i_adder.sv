// i_adder: behavioural model of the current adders of one crossbar column (analog).
//
// The I-adders of a sub-chip add, column by column, the currents that the NIN
// crossbars stacked in one crossbar column deliver (each through its own
// P-subBuf current copy). In this charge-level model the output is the exact
// sum of the NIN column charges (integers in units of conductance level x
// unit delay), for all B columns at once, combinationally.
//
// Behavioural model of an analog current mirror adder, not synthesizable.
// Follows the paper: one adder per sub-chip column summing all crossbars of
// that column (12x256 adders for 16 crossbars each). Own choice: ideal summing,
// no mirror error.
module i_adder #(
  parameter int NIN = 16,
  parameter int B   = 256
) (
  input  logic [NIN-1:0][B-1:0][31:0] qin,
  output logic [B-1:0][31:0]          qout
);
  always_comb begin
    for (int j = 0; j < B; j++) begin
      real acc;
      acc = 0.0;
      for (int n = 0; n < NIN; n++) acc = acc + real'(qin[n][j]);
      qout[j] = 32'($rtoi(acc));
    end
  end
endmodule
