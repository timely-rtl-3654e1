// input_loader: stage A of the sub-chip pipeline, reading inputs into the DTCs.
//
// On start it walks the NROWS input rows of the sub-chip two per tick. Rows
// whose replay bit is clear take the next byte of the input buffer (read in
// address order, two bytes per tick at most); replay rows are skipped, since
// their input arrives by transfer between X-subBufs. The bytes go to a staging
// register file; commit copies the staging file to the codes that the DTCs
// convert in the next pipeline cycle. layer_start rewinds the read pointer.
// A pair is only read once its fresh bytes are present (avail = bytes in the
// buffer), so a layer may start before its inputs have all arrived. On the
// commit tick the codes output already shows the new staging contents, since
// the DTCs sample their code on that same tick.
// done is high while no load is in progress. rd_cnt counts input-buffer bytes
// read, which the only-once input read mapping is meant to minimise.
//
// Own design of this RTL (the paper states the stage, reading inputs from the
// input buffers, but not its circuit).
module input_loader #(
  parameter int NROWS = 4096,
  parameter int DBITS = 8,
  parameter int AW    = 11
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        layer_start,
  input  logic                        start,
  input  logic                        commit,
  input  logic [NROWS-1:0]            replay,
  input  logic [AW:0]                 avail,   // bytes present in the input buffer
  output logic                        re,
  output logic [AW-1:0]               raddr,
  input  logic [DBITS-1:0]            rdata0,
  input  logic [DBITS-1:0]            rdata1,
  output logic [NROWS-1:0][DBITS-1:0] codes,
  output logic                        done,
  output logic [31:0]                 rd_cnt
);
  localparam int RW = $clog2(NROWS);
  logic [NROWS-1:0][DBITS-1:0] stage;
  logic [NROWS-1:0][DBITS-1:0] codes_q;

  // the converters sample their code on the commit tick itself
  assign codes = commit ? stage : codes_q;
  logic [RW-1:0] row;        // next pair to issue
  logic          active;
  logic          f0, f1;     // fresh bits of the pair being issued
  logic          ok;         // the pair's fresh bytes have arrived
  logic          d_v, d_f0, d_f1;
  logic [RW-1:0] d_row;
  logic [AW-1:0] ptr;

  assign f0    = !replay[row];
  assign f1    = !replay[row + 1'b1];
  assign ok    = 32'(ptr) + 32'(f0) + 32'(f1) <= 32'(avail);
  assign re    = active && (f0 || f1) && ok;
  assign raddr = ptr;
  assign done  = !active && !d_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      row    <= '0;
      ptr    <= '0;
      d_v    <= 1'b0;
      d_f0   <= 1'b0;
      d_f1   <= 1'b0;
      d_row  <= '0;
      rd_cnt <= '0;
    end else begin
      d_v <= 1'b0;
      if (layer_start) ptr <= '0;
      if (start) begin
        active <= 1'b1;
        row    <= '0;
      end else if (active && ok) begin
        d_v    <= 1'b1;
        d_f0   <= f0;
        d_f1   <= f1;
        d_row  <= row;
        ptr    <= ptr + AW'(f0) + AW'(f1);
        rd_cnt <= rd_cnt + 32'(f0) + 32'(f1);
        if (32'(row) + 2 >= NROWS) active <= 1'b0;
        row <= row + RW'(2);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (d_v) begin
      if (d_f0) stage[d_row] <= rdata0;
      if (d_f1) stage[d_row + 1'b1] <= d_f0 ? rdata1 : rdata0;
    end
    if (commit) codes_q <= stage;
  end

  initial assert (NROWS % 2 == 0) else $error("NROWS must be even");
endmodule
