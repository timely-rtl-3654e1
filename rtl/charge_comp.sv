// charge_comp: behavioural model of the charging units and comparators of one
// crossbar column of a sub-chip (analog).
//
// Two-phase charging turns a column's phase-I charge Q into a time output. At
// load the charge from the I-adder is placed on the column's capacitor. In phase
// II the capacitor is charged by the constant current I_c = NROWS*WMAX per tick
// (the current of all NROWS summed rows at minimum resistance); the comparator
// output goes high once the voltage passes V_th, which corresponds to the charge
// I_c*T~ with T~ = CONV_TICKS, and stays high to the end of the window. The
// pulse is therefore floor(Q / I_c) ticks wide: T_o = (R_min/(B N_CB)) sum T_i/R_i.
// Column c runs its phase II in window c mod GAMMA, so the TDC shared by GAMMA
// columns reads them one after another.
//
// Behavioural model, not synthesizable (real-valued charge). Follows the paper:
// two-phase charging, I_c and V_th scaled by B*N_CB/R_min, time output T~ - T_x.
// Own choices: phase II is staggered by window; the phase-I charge is held on a
// second capacitor (load) so the next phase I can overlap, as the pipeline needs.
module charge_comp #(
  parameter int B          = 256,
  parameter int GAMMA      = 8,
  parameter int CONV_TICKS = 500,
  parameter int NROWS      = 4096,
  parameter int WMAX       = 15,
  localparam int TW        = $clog2(CONV_TICKS),
  localparam int GW        = (GAMMA > 1) ? $clog2(GAMMA) : 1
) (
  input  logic          clk,
  input  logic          load,
  input  logic [B-1:0][31:0] qin,
  input  logic          active,     // phase II runs this cycle
  input  logic [TW-1:0] wtick,
  input  logic [GW-1:0] win_idx,
  output logic [B-1:0]  cmp
);
  localparam real IC = real'(NROWS) * real'(WMAX);
  real qh [B];

  always_ff @(posedge clk) begin
    if (load)
      for (int j = 0; j < B; j++) qh[j] <= real'(qin[j]);
  end

  always_comb begin
    for (int j = 0; j < B; j++)
      cmp[j] = active && (int'(win_idx) == j % GAMMA) &&
               (qh[j] + IC * real'(wtick) >= IC * real'(CONV_TICKS));
  end
endmodule
