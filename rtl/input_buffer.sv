// input_buffer: a sub-chip's input buffer.
//
// DEPTH words of W bits (2 KB of 8-bit inputs by default). One write port,
// used by the chip bus, and one read port that returns the two consecutive
// words at raddr and raddr+1 (wrapping) one tick after re, so the input loader
// can fetch two inputs per tick. The buffer is read as a circular store: a
// layer streams through it in address order.
//
// Follows the paper: 2 KB input buffer per sub-chip. Own choices: written as a
// plain array (the paper's buffer is ReRAM), the two-word read port, the
// one-tick read latency.
module input_buffer #(
  parameter int DEPTH = 2048,
  parameter int W     = 8,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata0,
  output logic [W-1:0]  rdata1
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) begin
      rdata0 <= mem[raddr];
      rdata1 <= mem[AW'(raddr + 1'b1)];
    end
  end
endmodule
