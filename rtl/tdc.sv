// tdc: 8-bit time-to-digital converter.
//
// Measures how many ticks (unit delays T_del) its input is high during one
// conversion window: the count restarts at win_start, and at win_end the
// result, saturated to 2^DBITS-1, appears on code with a one-tick valid
// strobe. This is the inverse of the dtc: a pulse made by a DTC from code c
// reads back as c.
//
// Follows the paper: 8-bit resolution with the same 50 ps unit delay and 25 ns
// window as the DTC. Own choice: a counter TDC (the paper uses a silicon TDC
// from the literature) and saturation instead of wrap-around.
module tdc #(
  parameter int CONV_TICKS = 500,
  parameter int DBITS      = 8,
  localparam int TW        = $clog2(CONV_TICKS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             win_start,
  input  logic             win_end,
  input  logic             tin,
  output logic [DBITS-1:0] code,
  output logic             valid
);
  localparam int CMAX = (1 << DBITS) - 1;
  logic [TW-1:0] cnt;
  logic [TW-1:0] total;

  assign total = (win_start ? '0 : cnt) + TW'(tin);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      code  <= '0;
      valid <= 1'b0;
    end else begin
      cnt   <= total;
      valid <= win_end;
      if (win_end) code <= (32'(total) > CMAX) ? DBITS'(CMAX) : total[DBITS-1:0];
    end
  end
endmodule
