// x_subbuf: one column of X-subBufs, the analog local buffers for time inputs.
//
// An X-subBuf sits in front of every crossbar and passes each row's time signal
// on to that crossbar and to the next X-subBuf on its right, so an input read
// and converted once is shared by a whole row of crossbars. Each of the B cells
// is a latch: its output rises with the input and stays high until the reset
// phase phi, so a pulse that is high until the end of its window is copied
// edge for edge (out = in | held, held cleared by phi).
//
// With XFER_EN set (the column next to the DTCs), the column also implements
// the input transfer of the only-once input read mapping: each cell records the
// width of the pulse it passed in its row's window (row r is live in window
// r mod GAMMA), one xfer pulse moves every record to the adjacent cell above
// (row r takes row r+1), and a row whose replay bit is set re-emits its record
// in its window instead of listening to its DTC. Issuing S xfer pulses per
// pipeline cycle shifts the inputs by the stride S.
//
// Follows the paper: latch behaviour with reset phi; single-direction transfer
// between adjacent X-subBufs under one control signal. Own choices: the reset
// is applied at the start of every window (the paper resets once per pipeline
// cycle; the two agree for gamma = 1), and the transfer record is kept as a
// pulse width so that the latch can re-create the time signal in a later cycle.
module x_subbuf #(
  parameter int B          = 256,
  parameter int GAMMA      = 8,
  parameter int CONV_TICKS = 500,
  parameter int DBITS      = 8,
  parameter bit XFER_EN    = 1'b0,
  localparam int TW        = $clog2(CONV_TICKS),
  localparam int GW        = (GAMMA > 1) ? $clog2(GAMMA) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          phi,       // reset phase (first tick of each window)
  input  logic [TW-1:0] wtick,
  input  logic [GW-1:0] win_idx,
  input  logic          win_end,
  input  logic          xfer,      // move every record one row up
  input  logic [B-1:0]  replay,    // row re-emits its transferred record
  input  logic [B-1:0]  tin,
  output logic [B-1:0]  tout
);
  logic [B-1:0] held;
  logic [B-1:0] src;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   held <= '0;
    else if (phi) held <= '0;
    else          held <= held | src;
  end

  assign tout = src | (held & ~{B{phi}});

  if (XFER_EN) begin : g_xfer
    logic [B-1:0][DBITS-1:0] rec;   // recorded pulse width per row
    logic [B-1:0][DBITS:0]   wcnt;  // width of the pulse in the live window
    logic [B-1:0]            rep;
    logic [TW-1:0]           remain;
    localparam int CMAX = (1 << DBITS) - 1;

    assign remain = TW'(CONV_TICKS - 1) - wtick;

    always_comb begin
      for (int r = 0; r < B; r++) begin
        rep[r] = (int'(win_idx) == r % GAMMA) && !phi && (32'(remain) < 32'(rec[r]));
        src[r] = replay[r] ? rep[r] : tin[r];
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rec  <= '0;
        wcnt <= '0;
      end else begin
        for (int r = 0; r < B; r++) begin
          if (phi) wcnt[r] <= '0;
          else if (tout[r] && wcnt[r] != (DBITS+1)'(CMAX)) wcnt[r] <= wcnt[r] + 1'b1;
        end
        if (xfer) begin
          for (int r = 0; r < B - 1; r++) rec[r] <= rec[r+1];
          rec[B-1] <= '0;
        end else if (win_end) begin
          for (int r = 0; r < B; r++)
            if (int'(win_idx) == r % GAMMA && !replay[r])
              rec[r] <= (tout[r] && wcnt[r] != (DBITS+1)'(CMAX)) ? DBITS'(wcnt[r] + 1'b1) : DBITS'(wcnt[r]);
        end
      end
    end
  end else begin : g_plain
    assign src = tin;
    wire unused_ok = &{1'b0, wtick, win_idx, win_end, xfer, replay};
  end
endmodule
