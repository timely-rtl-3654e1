// timely_pkg: sizes and types shared by the TIMELY sub-chip and chip RTL.
//
// The defaults are the sizes of the main TIMELY configuration: 256x256 ReRAM
// crossbars with 4-bit cells, 16 crossbar rows by 12 crossbar columns per
// sub-chip, 8-bit DTCs/TDCs each shared by 8 rows or columns, a 25 ns
// conversion window made of 500 unit delays of 50 ps, 2 KB input and output
// buffers and 106 sub-chips per chip. The bus request type and the command
// encoding are this design's own; the paper only says the sub-chips are
// connected by a bus and that a controller loads commands that program
// weights and configure the input paths.
package timely_pkg;

  localparam int B_DEF          = 256;   // bit cells per crossbar side
  localparam int NCB_V_DEF      = 16;    // crossbar rows in a sub-chip
  localparam int NCB_H_DEF      = 12;    // crossbar columns in a sub-chip
  localparam int GAMMA_DEF      = 8;     // rows/columns per DTC/TDC
  localparam int DBITS          = 8;     // DTC/TDC resolution
  localparam int WBITS          = 4;     // bits per ReRAM cell
  localparam int CONV_TICKS_DEF = 500;   // 25 ns window / 50 ps unit delay
  localparam int NSUB_DEF       = 106;   // sub-chips per chip
  localparam int BUF_BYTES_DEF  = 2048;  // input / output buffer size

  // Commands on the chip bus.
  typedef enum logic [2:0] {
    CMD_NOP    = 3'd0,
    CMD_CFG    = 3'd1,   // addr = register, data = value
    CMD_WEIGHT = 3'd2,   // addr = {crossbar, row, col}, data[3:0] = level
    CMD_INPUT  = 3'd3,   // addr = input buffer byte address, data[7:0]
    CMD_START  = 3'd4    // run the configured layer
  } cmd_e;

  typedef struct packed {
    logic        valid;
    logic [6:0]  sub;    // destination sub-chip
    cmd_e        cmd;
    logic [31:0] addr;
    logic [15:0] data;
  } bus_req_t;

  // Configuration register numbers (CMD_CFG addr).
  localparam logic [31:0] CFG_NCYC     = 32'h0;  // pipeline cycles to run
  localparam logic [31:0] CFG_STRIDE   = 32'h1;  // input transfers per cycle (S)
  localparam logic [31:0] CFG_NOUT     = 32'h2;  // 8-bit-weight results per cycle
  localparam logic [31:0] CFG_POOL     = 32'h3;  // max-pool window (1 = off)
  localparam logic [31:0] CFG_SHIFT    = 32'h4;  // output requantisation shift
  localparam logic [31:0] CFG_BIAS     = 32'h5;  // signed bias added to each result
  localparam logic [31:0] CFG_RELU     = 32'h6;  // 1 = ReLU on
  localparam logic [31:0] CFG_DEST     = 32'h7;  // forward outputs to this sub-chip
  localparam logic [31:0] CFG_FWD      = 32'h8;  // 1 = forward and start DEST when done
  localparam logic [31:0] CFG_REPLAY   = 32'h1000; // + input row: 1 = row reuses a transferred input

endpackage
