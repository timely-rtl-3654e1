// dtc: 8-bit digital-to-time converter.
//
// A conversion window is CONV_TICKS ticks of the tick clock, one tick being the
// DTC unit delay T_del (50 ps, so the default 500-tick window is the 25 ns
// conversion time including its design margin). At win_start the converter
// takes its input code; when en was set with it, the output tout is high for
// exactly `code` ticks, the last ones of the window (code 0 gives no pulse,
// code 255 the widest, 255*T_del). The window position comes from the shared
// tick counter wtick, so the converter itself is a register and a comparator.
//
// Follows the paper: 8-bit resolution, 256*T_del dynamic range, 25 ns per
// conversion. This design's own choice: the counter-compare circuit (the paper
// uses a silicon DTC from the literature) and the placement of the pulse at the
// end of the window, which lets a latch reset at the window start hold it.
module dtc #(
  parameter int CONV_TICKS = 500,
  parameter int DBITS      = 8,
  localparam int TW        = $clog2(CONV_TICKS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TW-1:0]    wtick,      // tick index inside the window
  input  logic             win_start,  // first tick of a window: load code
  input  logic             en,         // convert during this window
  input  logic [DBITS-1:0] code,
  output logic             tout
);
  logic [DBITS-1:0] code_q;
  logic             run_q;
  logic [TW-1:0]    remain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_q <= '0;
      run_q  <= 1'b0;
    end else if (win_start) begin
      code_q <= code;
      run_q  <= en;
    end
  end

  // Ticks left in the window after the current one.
  assign remain = TW'(CONV_TICKS - 1) - wtick;
  assign tout   = run_q && !win_start && (32'(remain) < 32'(code_q));

  initial assert (CONV_TICKS > (1 << DBITS)) else $error("window shorter than the code range");
endmodule
