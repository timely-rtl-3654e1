// subchip: one TIMELY sub-chip.
//
// Inputs travel left to right, partial sums top to bottom, and between the DTCs
// and the TDCs everything stays in the time or current domain:
//
//   input buffer -> input_loader -> NCB_V dtc_banks (one per crossbar row)
//     -> X-subBuf column 0 (input transfer) -> crossbar (v,0) -> X-subBuf -> ...
//     -> crossbar (v,NCB_H-1)                       (time inputs shared by a row)
//   crossbar column charges -> i_adder per crossbar column (sum of NCB_V)
//     -> charge_comp (two-phase charging + comparator) -> tdc_bank
//     -> post_unit (shift-add, ReLU, max-pool) -> output buffer
//
// A dot product over all B*NCB_V rows of a sub-chip column is thus converted
// once by a TDC, and each input is read and converted once per crossbar row.
// The P-subBufs between each crossbar and its I-adder are unity current copies;
// in this charge-level model the crossbar outputs feed the I-adder directly.
//
// Commands (timely_pkg::bus_req_t, already filtered to this sub-chip):
//   CMD_WEIGHT addr = {crossbar index v*NCB_H+h [31:16], row [15:8], col [7:0]},
//   CMD_INPUT  addr = input-buffer byte address, CMD_CFG, CMD_START.
// The host or the chip bus reads results through obuf_re/obuf_raddr (one-tick
// latency); out_count is the number of bytes written by the last layer. When
// configured to forward, fwd_req rises after done and falls on fwd_ack.
// The input buffer's fill level (highest byte written + 1, cleared at done)
// lets the loader wait for inputs that are still arriving; write a layer's
// inputs after the previous layer on this sub-chip is done. The replay mask
// takes effect from the second cycle of a layer.
// Statistics counters (stalls, transfers, DTC conversions, buffer reads, ReLU
// zeroings, pooled outputs) count from reset.
//
// Follows the paper: the sub-chip organisation of its architecture figure
// (16x12 crossbars of 256x256 4-bit cells, X-subBufs between crossbars, I-adders,
// charging units and comparators, TDCs, shifter/adder/ReLU/pooling, 2 KB buffers,
// controller) and its data movement. Own choices are listed in the files of the
// parts; the pipeline timing is described in controller.sv.
module subchip
  import timely_pkg::*;
#(
  parameter int B          = B_DEF,
  parameter int NCB_V      = NCB_V_DEF,
  parameter int NCB_H      = NCB_H_DEF,
  parameter int GAMMA      = GAMMA_DEF,
  parameter int CONV_TICKS = CONV_TICKS_DEF,
  parameter int IBUF_BYTES = BUF_BYTES_DEF,
  parameter int OBUF_BYTES = BUF_BYTES_DEF,
  localparam int TW        = $clog2(CONV_TICKS),
  localparam int GW        = (GAMMA > 1) ? $clog2(GAMMA) : 1,
  localparam int AW        = (B > 1) ? $clog2(B) : 1,
  localparam int IAW       = $clog2(IBUF_BYTES),
  localparam int OAW       = $clog2(OBUF_BYTES),
  localparam int NROWS     = B * NCB_V,
  localparam int ND        = B / GAMMA
) (
  input  logic              clk,
  input  logic              rst_n,
  input  bus_req_t          cmd,
  input  logic              obuf_re,
  input  logic [OAW-1:0]    obuf_raddr,
  output logic [DBITS-1:0]  obuf_rdata,
  output logic [OAW:0]      out_count,
  output logic              busy,
  output logic              done,
  output logic              fwd_req,
  output logic [6:0]        fwd_dest,
  input  logic              fwd_ack,
  // event counters
  output logic [31:0]       stall_cnt,
  output logic [31:0]       xfer_cnt,
  output logic [31:0]       dtc_conv_cnt,
  output logic [31:0]       ibuf_rd_cnt,
  output logic [31:0]       relu_cnt,
  output logic [31:0]       pool_cnt
);
  // ---------------------------------------------------------------- control
  logic [TW-1:0] wtick;
  logic [GW-1:0] win_idx;
  logic phi, win_start, win_end, cyc_start, cyc_last, layer_start;
  logic st_a, st_b, st_c, st_d, xfer, reuse_a, reuse_b;
  logic [NROWS-1:0] rp_a, rp_b;   // replay rows in force for stage A / B
  logic [15:0] cfg_ncyc, cfg_nout;
  logic [3:0]  cfg_stride, cfg_pool, cfg_shift;
  logic signed [15:0] cfg_bias;
  logic        cfg_relu, cfg_fwd;
  logic [6:0]  cfg_dest;
  logic [NROWS-1:0] cfg_replay;
  logic loader_done, post_idle;

  controller #(.NROWS(NROWS), .GAMMA(GAMMA), .CONV_TICKS(CONV_TICKS)) u_ctrl (
    .clk, .rst_n, .cmd, .loader_done, .post_idle,
    .wtick, .win_idx, .phi, .win_start, .win_end, .cyc_start, .cyc_last, .layer_start,
    .st_a, .st_b, .st_c, .st_d, .xfer, .reuse_a, .reuse_b, .busy, .done,
    .cfg_ncyc, .cfg_stride, .cfg_nout, .cfg_pool, .cfg_shift, .cfg_bias, .cfg_relu,
    .cfg_dest, .cfg_fwd, .cfg_replay, .stall_cnt, .xfer_cnt
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                fwd_req <= 1'b0;
    else if (done && cfg_fwd)  fwd_req <= 1'b1;
    else if (fwd_ack)          fwd_req <= 1'b0;
  end
  assign fwd_dest = cfg_dest;

  // ---------------------------------------------------------------- inputs
  // The first cycle of a layer has nothing to reuse: every row is read and
  // converted; replay applies from the second cycle on.
  assign rp_a = reuse_a ? cfg_replay : '0;
  assign rp_b = reuse_b ? cfg_replay : '0;

  // fill level of the input buffer: highest byte written + 1, cleared when a
  // layer ends; the loader waits for bytes that have not arrived yet
  logic [IAW:0] ib_fill;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ib_fill <= '0;
    else if (done) ib_fill <= '0;
    else if (cmd.valid && cmd.cmd == CMD_INPUT && 32'(cmd.addr[IAW-1:0]) + 1 > 32'(ib_fill))
      ib_fill <= (IAW+1)'(cmd.addr[IAW-1:0]) + 1'b1;
  end

  logic ib_re;
  logic [IAW-1:0] ib_raddr;
  logic [DBITS-1:0] ib_rd0, ib_rd1;
  logic [NROWS-1:0][DBITS-1:0] codes;

  input_buffer #(.DEPTH(IBUF_BYTES), .W(DBITS)) u_ibuf (
    .clk,
    .we    (cmd.valid && cmd.cmd == CMD_INPUT),
    .waddr (cmd.addr[IAW-1:0]),
    .wdata (cmd.data[DBITS-1:0]),
    .re    (ib_re),
    .raddr (ib_raddr),
    .rdata0(ib_rd0),
    .rdata1(ib_rd1)
  );

  input_loader #(.NROWS(NROWS), .DBITS(DBITS), .AW(IAW)) u_load (
    .clk, .rst_n, .layer_start,
    .start  (cyc_start && st_a),
    .commit (cyc_start),
    .replay (rp_a),
    .avail  (ib_fill),
    .re     (ib_re),
    .raddr  (ib_raddr),
    .rdata0 (ib_rd0),
    .rdata1 (ib_rd1),
    .codes  (codes),
    .done   (loader_done),
    .rd_cnt (ibuf_rd_cnt)
  );

  // ------------------------------------------------ DTCs, X-subBufs, crossbars
  logic [NCB_V-1:0][B-1:0] dtc_rows;
  logic [NCB_V-1:0][NCB_H-1:0][B-1:0] xo;
  logic [NCB_V-1:0][31:0] conv;
  logic [NCB_H-1:0][NCB_V-1:0][B-1:0][31:0] qx;
  logic [15:0] w_xbar;

  assign w_xbar = cmd.addr[31:16];

  for (genvar v = 0; v < NCB_V; v++) begin : g_row
    dtc_bank #(.B(B), .GAMMA(GAMMA), .CONV_TICKS(CONV_TICKS), .DBITS(DBITS)) u_dtcs (
      .clk, .rst_n, .wtick, .win_start, .win_idx,
      .run      (st_b),
      .codes    (codes[v*B +: B]),
      .skip     (rp_b[v*B +: B]),
      .rows     (dtc_rows[v]),
      .conv_cnt (conv[v])
    );
    for (genvar h = 0; h < NCB_H; h++) begin : g_col
      x_subbuf #(.B(B), .GAMMA(GAMMA), .CONV_TICKS(CONV_TICKS), .DBITS(DBITS),
                 .XFER_EN(h == 0)) u_xbuf (
        .clk, .rst_n, .phi, .wtick, .win_idx, .win_end,
        .xfer   (xfer),
        .replay ((h == 0) ? rp_b[v*B +: B] : '0),
        .tin    ((h == 0) ? dtc_rows[v] : xo[v][(h == 0) ? 0 : h-1]),
        .tout   (xo[v][h])
      );
      reram_crossbar #(.B(B), .WBITS(WBITS)) u_xbar (
        .clk,
        .we    (cmd.valid && cmd.cmd == CMD_WEIGHT && 32'(w_xbar) == v*NCB_H + h),
        .wrow  (cmd.addr[8 +: AW]),
        .wcol  (cmd.addr[0 +: AW]),
        .wdata (cmd.data[WBITS-1:0]),
        .clr   (cyc_start && st_b),
        .rows  (xo[v][h]),
        .eval  (cyc_last && st_b),
        .q     (qx[h][v])
      );
    end
  end

  always_comb begin
    dtc_conv_cnt = '0;
    for (int v = 0; v < NCB_V; v++) dtc_conv_cnt = dtc_conv_cnt + conv[v];
  end

  // ------------------------------------ I-adders, charging units, comparators, TDCs
  logic [NCB_H-1:0][B-1:0][31:0] qs;
  logic [NCB_H-1:0][B-1:0] cmpl;
  logic [NCB_H-1:0][ND-1:0][DBITS-1:0] tcodes;
  logic [NCB_H-1:0] tvalid;
  logic [NCB_H-1:0][GW-1:0] twin;

  for (genvar h = 0; h < NCB_H; h++) begin : g_out
    i_adder #(.NIN(NCB_V), .B(B)) u_iadd (.qin(qx[h]), .qout(qs[h]));
    charge_comp #(.B(B), .GAMMA(GAMMA), .CONV_TICKS(CONV_TICKS), .NROWS(NROWS),
                  .WMAX((1 << WBITS) - 1)) u_cc (
      .clk,
      .load    (cyc_start && st_c),
      .qin     (qs[h]),
      .active  (st_c),
      .wtick, .win_idx,
      .cmp     (cmpl[h])
    );
    tdc_bank #(.B(B), .GAMMA(GAMMA), .CONV_TICKS(CONV_TICKS), .DBITS(DBITS)) u_tdcs (
      .clk, .rst_n, .win_start, .win_end, .win_idx,
      .cols    (cmpl[h]),
      .codes   (tcodes[h]),
      .valid   (tvalid[h]),
      .res_win (twin[h])
    );
  end

  // ------------------------------------------------ shift-add, ReLU, pooling
  logic obuf_we;
  logic [OAW-1:0] obuf_waddr;
  logic [DBITS-1:0] obuf_wdata;

  post_unit #(.NCB_H(NCB_H), .B(B), .GAMMA(GAMMA), .DBITS(DBITS), .WBITS(WBITS),
              .OAW(OAW)) u_post (
    .clk, .rst_n, .layer_start,
    .capture   (st_c),
    .win_end,
    .tdc_codes (tcodes),
    .tdc_valid (tvalid[0]),
    .tdc_win   (twin[0]),
    .nout      (cfg_nout),
    .pool_n    (cfg_pool),
    .shift     (cfg_shift),
    .bias      (cfg_bias),
    .relu_en   (cfg_relu),
    .obuf_we, .obuf_waddr, .obuf_wdata,
    .out_count,
    .idle      (post_idle),
    .relu_cnt, .pool_cnt
  );

  output_buffer #(.DEPTH(OBUF_BYTES), .W(DBITS)) u_obuf (
    .clk,
    .we    (obuf_we),
    .waddr (obuf_waddr),
    .wdata (obuf_wdata),
    .re    (obuf_re),
    .raddr (obuf_raddr),
    .rdata (obuf_rdata)
  );

  // Stage D needs no own enable: post_unit streams when a stage-C cycle ends.
  initial assert (NCB_V * NCB_H <= 65536 && B <= 256) else $error("address fields too small");
  wire unused_ok = &{1'b0, st_d, tvalid, twin, cfg_ncyc, cfg_stride};
endmodule
