// subchip_bus: the chip bus connecting the host port and the sub-chips.
//
// The bus carries one command (timely_pkg::bus_req_t) per clock to all
// sub-chips; each sub-chip takes the commands whose sub field is its index.
// The host has priority: while the bus is idle (host_ready), a valid host
// request is passed through in the same clock. Otherwise, if sub-chips request
// forwarding (their layer finished and its outputs feed another sub-chip's
// layer), one is granted in round-robin order. The bus then reads the granted
// sub-chip's output buffer word by word and writes each word to the same
// address of the destination's input buffer (CMD_INPUT), one per clock, ends
// with a CMD_START to the destination, and acknowledges the source. This is
// the inter-sub-chip pipeline: a layer's sub-chip starts when its inputs have
// been delivered.
//
// Follows the paper: sub-chips connected by a bus and pipelined layer to layer.
// Own choices: the whole protocol (host priority, round-robin arbitration, one
// byte per clock, automatic start of the destination).
module subchip_bus
  import timely_pkg::*;
#(
  parameter int NSUB = NSUB_DEF,
  parameter int OAW  = 11,
  localparam int SW  = (NSUB > 1) ? $clog2(NSUB) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  bus_req_t              host_req,
  output logic                  host_ready,
  input  logic [NSUB-1:0]       fwd_req,
  input  logic [NSUB-1:0][6:0]  fwd_dest,
  input  logic [NSUB-1:0][OAW:0] out_count,
  output logic [NSUB-1:0]       fwd_ack,
  output logic                  src_re,     // read of the granted source's output buffer
  output logic [SW-1:0]         src_sel,
  output logic [OAW-1:0]        src_raddr,
  input  logic [7:0]            src_rdata,
  output bus_req_t              bus,
  output logic [31:0]           fwd_cnt
);
  typedef enum logic [1:0] {S_IDLE, S_COPY, S_START} state_e;
  state_e        state;
  logic [SW-1:0] last, grant;
  logic          any;
  logic [OAW:0]  idx, n;
  logic          rd_v;
  logic [OAW-1:0] rd_a;
  logic [6:0]    dest;

  // round-robin choice, starting after the last grant
  always_comb begin
    any   = 1'b0;
    grant = last;
    for (int i = 1; i <= NSUB; i++) begin
      logic [SW-1:0] c;
      c = SW'((32'(last) + 32'(i)) % 32'(NSUB));
      if (!any && fwd_req[c]) begin
        any   = 1'b1;
        grant = c;
      end
    end
  end

  assign host_ready = state == S_IDLE;
  assign src_re     = state == S_COPY && idx < n;
  assign src_raddr  = idx[OAW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      last    <= SW'(NSUB - 1);
      src_sel <= '0;
      idx     <= '0;
      n       <= '0;
      rd_v    <= 1'b0;
      rd_a    <= '0;
      dest    <= '0;
      fwd_cnt <= '0;
    end else begin
      rd_v <= src_re;
      rd_a <= src_raddr;
      unique case (state)
        S_IDLE:
          if (!host_req.valid && any) begin
            state   <= S_COPY;
            src_sel <= grant;
            last    <= grant;
            idx     <= '0;
            n       <= out_count[grant];
            dest    <= fwd_dest[grant];
          end
        S_COPY: begin
          if (idx < n) idx <= idx + 1'b1;
          else if (!rd_v) state <= S_START;
        end
        S_START: begin
          state   <= S_IDLE;
          fwd_cnt <= fwd_cnt + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    fwd_ack = '0;
    bus     = '0;
    if (state == S_IDLE) begin
      bus = host_req;
    end else if (state == S_COPY && rd_v) begin
      bus.valid = 1'b1;
      bus.sub   = dest;
      bus.cmd   = CMD_INPUT;
      bus.addr  = 32'(rd_a);
      bus.data  = 16'(src_rdata);
    end else if (state == S_START) begin
      bus.valid = 1'b1;
      bus.sub   = dest;
      bus.cmd   = CMD_START;
      fwd_ack[src_sel] = 1'b1;
    end
  end

  initial assert (NSUB <= 128) else $error("sub-chip index is 7 bits");
endmodule
