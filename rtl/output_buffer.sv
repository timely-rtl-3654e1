// output_buffer: a sub-chip's output buffer.
//
// DEPTH words of W bits (2 KB of 8-bit outputs by default). The write port
// takes the pooled, requantised results; the read port, used by the chip bus
// and the host, returns the word one tick after re.
//
// Follows the paper: 2 KB output buffer per sub-chip. Own choices: written as a
// plain array (the paper's buffer is ReRAM) and the one-tick read latency.
module output_buffer #(
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
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
