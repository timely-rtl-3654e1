// reram_crossbar: behavioural model of one B x B ReRAM crossbar array (analog).
//
// Each cell stores a WBITS-bit conductance level, written one cell per clock
// through the we/wrow/wcol/wdata port. During phase I of the dot product the
// row lines carry time-domain inputs: while row i is high, every cell of it
// drives a current proportional to its conductance into its column. The model
// therefore integrates, per row, the number of ticks the row is high (from clr
// to eval, eval's own tick included) and at eval forms each column's charge
//   q[j] = sum_i T_i * G_ij
// in units of (conductance level x unit delay), carried as an unsigned integer
// (exact up to 2^32). q is valid from the tick after eval until the next eval.
//
// This is a behavioural model of an analog array, not synthesizable logic: it
// computes the charge with real arithmetic. Follows the paper: 256x256 cells, 4 bits per cell,
// Kirchhoff current summation along columns, time-controlled charge. Own
// choices: conductance proportional to the stored level, the programming port.
module reram_crossbar #(
  parameter int B     = 256,
  parameter int WBITS = 4,
  localparam int AW   = (B > 1) ? $clog2(B) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wrow,
  input  logic [AW-1:0]    wcol,
  input  logic [WBITS-1:0] wdata,
  input  logic             clr,    // start of phase I
  input  logic [B-1:0]     rows,   // time inputs
  input  logic             eval,   // last tick of phase I
  output logic [B-1:0][31:0] q     // column charge
);
  logic [WBITS-1:0] w [B][B];
  int unsigned      hi [B];

  always_ff @(posedge clk) begin
    if (we) w[wrow][wcol] <= wdata;
    for (int i = 0; i < B; i++)
      hi[i] <= (clr ? 0 : hi[i]) + (rows[i] ? 1 : 0);
  end

  always_ff @(posedge clk) begin
    if (eval) begin
      for (int j = 0; j < B; j++) begin
        real acc;
        acc = 0.0;
        for (int i = 0; i < B; i++)
          acc = acc + real'(hi[i] + (rows[i] ? 1 : 0)) * real'(w[i][j]);
        q[j] <= 32'($rtoi(acc));
      end
    end
  end
endmodule
