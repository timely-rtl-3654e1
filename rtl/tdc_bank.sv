// tdc_bank: the TDCs that read the B comparator outputs of one crossbar column.
//
// There are B/GAMMA converters; converter k reads column k*GAMMA+s during window
// s of the pipeline cycle, so each converter serves GAMMA columns per cycle. At
// the end of each window, codes[k] holds the result for column k*GAMMA+res_win,
// qualified by a one-tick valid.
//
// Follows the paper: one TDC shared by gamma columns, 12x32 TDCs per sub-chip.
// Own choice: which columns a converter serves and their order.
module tdc_bank #(
  parameter int B          = 256,
  parameter int GAMMA      = 8,
  parameter int CONV_TICKS = 500,
  parameter int DBITS      = 8,
  localparam int GW        = (GAMMA > 1) ? $clog2(GAMMA) : 1,
  localparam int ND        = B / GAMMA
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     win_start,
  input  logic                     win_end,
  input  logic [GW-1:0]            win_idx,
  input  logic [B-1:0]             cols,
  output logic [ND-1:0][DBITS-1:0] codes,
  output logic                     valid,
  output logic [GW-1:0]            res_win
);
  logic [ND-1:0] v;

  for (genvar k = 0; k < ND; k++) begin : g_tdc
    tdc #(.CONV_TICKS(CONV_TICKS), .DBITS(DBITS)) u_tdc (
      .clk, .rst_n, .win_start, .win_end,
      .tin   (cols[k*GAMMA + int'(win_idx)]),
      .code  (codes[k]),
      .valid (v[k])
    );
  end

  assign valid = v[0];   // all converters finish together
  wire unused_ok = &{1'b0, v};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_win <= '0;
    else if (win_end) res_win <= win_idx;
  end
endmodule
