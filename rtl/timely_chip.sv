// timely_chip: a TIMELY chip, NSUB sub-chips on one chip bus.
//
// Each sub-chip holds one layer (or part of one) in its crossbars and runs it
// in its intra-sub-chip pipeline; the chip bus loads weights, configuration and
// inputs from the host port and forwards a finished layer's outputs to the
// sub-chip of the next layer, which then starts (inter-sub-chip pipeline).
//
// Host interface:
//   host_req / host_ready  one command per clock, accepted when host_ready;
//                          host_req.sub selects the sub-chip
//   rd_en/rd_sub/rd_addr   read a sub-chip's output buffer; rd_data is valid one
//                          clock later. Do not read the sub-chip the bus is
//                          currently forwarding from.
//   done, busy             per sub-chip; done pulses when its layer finished
//   stat_*                 activity totals over all sub-chips (combinational sums)
// The inter-chip link of a multi-chip system is not part of this RTL; the host
// port is where it would attach.
//
// Follows the paper: 106 sub-chips per chip (area 0.86 mm^2 each) connected by a
// bus. Own choice: the bus protocol (see subchip_bus.sv) and the host port.
module timely_chip
  import timely_pkg::*;
#(
  parameter int NSUB       = NSUB_DEF,
  parameter int B          = B_DEF,
  parameter int NCB_V      = NCB_V_DEF,
  parameter int NCB_H      = NCB_H_DEF,
  parameter int GAMMA      = GAMMA_DEF,
  parameter int CONV_TICKS = CONV_TICKS_DEF,
  parameter int BUF_BYTES  = BUF_BYTES_DEF,
  localparam int OAW       = $clog2(BUF_BYTES),
  localparam int SW        = (NSUB > 1) ? $clog2(NSUB) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  bus_req_t          host_req,
  output logic              host_ready,
  input  logic              rd_en,
  input  logic [6:0]        rd_sub,
  input  logic [OAW-1:0]    rd_addr,
  output logic [DBITS-1:0]  rd_data,
  output logic [NSUB-1:0]   done,
  output logic [NSUB-1:0]   busy,
  output logic [31:0]       fwd_cnt,
  // activity totals over all sub-chips
  output logic [31:0]       stat_stall,   // stalled ticks
  output logic [31:0]       stat_xfer,    // O2IR transfer pulses
  output logic [31:0]       stat_conv,    // DTC conversions
  output logic [31:0]       stat_rd,      // input-buffer bytes read
  output logic [31:0]       stat_relu,    // values zeroed by ReLU
  output logic [31:0]       stat_pool     // pooled outputs
);
  bus_req_t bus;
  logic [NSUB-1:0] fwd_req, fwd_ack, ob_re;
  logic [NSUB-1:0][6:0] fwd_dest;
  logic [NSUB-1:0][OAW:0] out_count;
  logic [NSUB-1:0][DBITS-1:0] ob_rdata;
  logic src_re;
  logic [SW-1:0] src_sel;
  logic [OAW-1:0] src_raddr;
  logic [6:0] rd_sub_q;
  logic [NSUB-1:0][31:0] c_stall, c_xfer, c_conv, c_rd, c_relu, c_pool;

  subchip_bus #(.NSUB(NSUB), .OAW(OAW)) u_bus (
    .clk, .rst_n, .host_req, .host_ready, .fwd_req, .fwd_dest, .out_count, .fwd_ack,
    .src_re, .src_sel, .src_raddr,
    .src_rdata (ob_rdata[src_sel]),
    .bus, .fwd_cnt
  );

  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    bus_req_t cmd_s;
    always_comb begin
      cmd_s = bus;
      cmd_s.valid = bus.valid && bus.sub == 7'(s);
    end
    assign ob_re[s] = (src_re && src_sel == SW'(s)) || (rd_en && rd_sub == 7'(s));
    subchip #(.B(B), .NCB_V(NCB_V), .NCB_H(NCB_H), .GAMMA(GAMMA),
              .CONV_TICKS(CONV_TICKS), .IBUF_BYTES(BUF_BYTES), .OBUF_BYTES(BUF_BYTES)) u_sub (
      .clk, .rst_n,
      .cmd        (cmd_s),
      .obuf_re    (ob_re[s]),
      .obuf_raddr ((src_re && src_sel == SW'(s)) ? src_raddr : rd_addr),
      .obuf_rdata (ob_rdata[s]),
      .out_count  (out_count[s]),
      .busy       (busy[s]),
      .done       (done[s]),
      .fwd_req    (fwd_req[s]),
      .fwd_dest   (fwd_dest[s]),
      .fwd_ack    (fwd_ack[s]),
      .stall_cnt  (c_stall[s]),
      .xfer_cnt   (c_xfer[s]),
      .dtc_conv_cnt (c_conv[s]),
      .ibuf_rd_cnt  (c_rd[s]),
      .relu_cnt   (c_relu[s]),
      .pool_cnt   (c_pool[s])
    );
  end

  always_comb begin
    stat_stall = '0; stat_xfer = '0; stat_conv = '0;
    stat_rd    = '0; stat_relu = '0; stat_pool = '0;
    for (int s = 0; s < NSUB; s++) begin
      stat_stall = stat_stall + c_stall[s];
      stat_xfer  = stat_xfer  + c_xfer[s];
      stat_conv  = stat_conv  + c_conv[s];
      stat_rd    = stat_rd    + c_rd[s];
      stat_relu  = stat_relu  + c_relu[s];
      stat_pool  = stat_pool  + c_pool[s];
    end
  end

  always_ff @(posedge clk) rd_sub_q <= rd_sub;
  assign rd_data = ob_rdata[SW'(rd_sub_q)];
endmodule
