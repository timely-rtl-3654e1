// dtc_bank: the DTCs that drive the B input rows of one crossbar row.
//
// There are B/GAMMA converters; converter k serves rows k*GAMMA .. k*GAMMA+GAMMA-1,
// converting row k*GAMMA+s during window s of the pipeline cycle (GAMMA windows
// per cycle). A row whose `skip` bit is set is not converted: under the
// only-once input read mapping its input is re-used from the neighbouring
// X-subBuf instead. Outputs are the B time lines entering the first X-subBuf
// column. conv_cnt counts the conversions made (one per enabled DTC and window).
//
// Follows the paper: one DTC shared by gamma rows, gamma = 8, 16x32 DTCs per
// sub-chip (32 per 256-row crossbar row). Own choice: which rows a converter
// serves and their order.
module dtc_bank #(
  parameter int B          = 256,
  parameter int GAMMA      = 8,
  parameter int CONV_TICKS = 500,
  parameter int DBITS      = 8,
  localparam int TW        = $clog2(CONV_TICKS),
  localparam int GW        = (GAMMA > 1) ? $clog2(GAMMA) : 1,
  localparam int ND        = B / GAMMA
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [TW-1:0]            wtick,
  input  logic                     win_start,
  input  logic [GW-1:0]            win_idx,    // window of the cycle, valid at win_start
  input  logic                     run,        // this pipeline cycle converts
  input  logic [B-1:0][DBITS-1:0]  codes,
  input  logic [B-1:0]             skip,
  output logic [B-1:0]             rows,
  output logic [31:0]              conv_cnt
);
  logic [GW-1:0]  win_q;
  logic [ND-1:0]  dout;
  logic [ND-1:0]  den;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) win_q <= '0;
    else if (win_start) win_q <= win_idx;
  end

  for (genvar k = 0; k < ND; k++) begin : g_dtc
    assign den[k] = run && !skip[k*GAMMA + int'(win_idx)];
    dtc #(.CONV_TICKS(CONV_TICKS), .DBITS(DBITS)) u_dtc (
      .clk, .rst_n, .wtick, .win_start,
      .en   (den[k]),
      .code (codes[k*GAMMA + int'(win_idx)]),
      .tout (dout[k])
    );
  end

  always_comb begin
    rows = '0;
    for (int k = 0; k < ND; k++) rows[k*GAMMA + int'(win_q)] = dout[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) conv_cnt <= '0;
    else if (win_start) conv_cnt <= conv_cnt + 32'($countones(den));
  end

  initial assert (B % GAMMA == 0) else $error("B must be a multiple of GAMMA");
endmodule
