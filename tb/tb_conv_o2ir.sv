// tb_conv_o2ir: workload test, a 5x5 convolution as in the small MNIST
// networks of the benchmark set (e.g. the first layer of CNN-1), run on one
// sub-chip with only-once input read.
// How: a sub-chip with B=32 rows (NCB_V=1, NCB_H=2, GAMMA=2, 300-tick
// windows) holds five 5x5 filters of 8-bit weights; weight (r,c) of filter f
// sits in row c*5+r, its upper nibble in column 2f and its lower nibble in
// column 2f+1. One pipeline cycle computes one output position. Sliding the
// 5x5 window one pixel to the right moves every input five rows up, so the
// layer runs with stride 5, rows 0..19 replayed and rows 20..24 (the new
// image column) read from the buffer: 32 bytes for the first position
// (rows 25..31 are unused padding) and 5 for each further one. A direct
// convolution over the image, indexed by pixel and not by crossbar row,
// gives the expected output bytes, with the chip's scaling: column code
// min(255, floor(sum x*w4 / (32*15))), y = msb*16 + lsb + bias, ReLU,
// arithmetic shift, clamp to 0..255. The test also checks the number of
// input-buffer reads against the 25 per position a design without input
// reuse would make.
// Choices of this testbench: image width 14 (10 positions), random image
// and filters, reduced sub-chip size.
module tb_conv_o2ir;
  import timely_pkg::*;
  localparam int B = 32, NV = 1, NH = 2, G = 2, CT = 300;
  localparam int NR = B * NV, IC = NR * 15, K = 5, NF = 5, WID = 14, NPOS = WID - K + 1;
  logic clk = 0, rst_n = 0;
  bus_req_t cmd;
  logic obuf_re;
  logic [10:0] obuf_raddr;
  logic [7:0] obuf_rdata;
  logic [11:0] out_count;
  logic busy, done, fwd_req, fwd_ack;
  logic [6:0] fwd_dest;
  logic [31:0] stall_cnt, xfer_cnt, dtc_conv_cnt, ibuf_rd_cnt, relu_cnt, pool_cnt;
  int checks = 0, failures = 0;

  subchip #(.B(B), .NCB_V(NV), .NCB_H(NH), .GAMMA(G), .CONV_TICKS(CT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic send(input cmd_e c, input logic [31:0] a, input logic [15:0] d);
    cmd = '{valid: 1'b1, sub: 7'd0, cmd: c, addr: a, data: d};
    @(posedge clk); #1;
    cmd = '0;
  endtask

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int img[K][WID];
  int wt[NF][K][K];
  int expo[$];

  initial begin
    int a, hi, lo, y, bias, shift;
    longint sh, sl;
    cmd = '0; obuf_re = 0; obuf_raddr = '0; fwd_ack = 0;
    bias = -400; shift = 2;
    foreach (img[r, c]) img[r][c] = $urandom % 256;
    foreach (wt[f, r, c]) wt[f][r][c] = $urandom % 256;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // weights: row c*5+r, columns 2f (upper nibble) and 2f+1 (lower nibble)
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          send(CMD_WEIGHT, {16'(0), 8'(c * K + r), 8'(2 * f)}, 16'(wt[f][r][c] >> 4));
          send(CMD_WEIGHT, {16'(0), 8'(c * K + r), 8'(2 * f + 1)}, 16'(wt[f][r][c] & 15));
        end
    send(CMD_CFG, CFG_NCYC, 16'(NPOS));
    send(CMD_CFG, CFG_STRIDE, 16'(K));
    send(CMD_CFG, CFG_NOUT, 16'(NF));
    send(CMD_CFG, CFG_POOL, 16'(1));
    send(CMD_CFG, CFG_SHIFT, 16'(shift));
    send(CMD_CFG, CFG_BIAS, 16'(bias));
    send(CMD_CFG, CFG_RELU, 16'(1));
    send(CMD_CFG, CFG_FWD, 16'(0));
    for (int i = 0; i < NR; i++)
      send(CMD_CFG, CFG_REPLAY + 32'(i), 16'(i < (K - 1) * K || i >= K * K));
    // input bytes in the order they are consumed
    a = 0;
    for (int i = 0; i < NR; i++) begin
      send(CMD_INPUT, 32'(a), 16'(i < K * K ? img[i % K][i / K] : 0));
      a++;
    end
    for (int p = 1; p < NPOS; p++)
      for (int r = 0; r < K; r++) begin
        send(CMD_INPUT, 32'(a), 16'(img[r][p + K - 1]));
        a++;
      end
    // expected: direct convolution, chip scaling
    for (int p = 0; p < NPOS; p++)
      for (int f = 0; f < NF; f++) begin
        sh = 0; sl = 0;
        for (int r = 0; r < K; r++)
          for (int c = 0; c < K; c++) begin
            sh += longint'(img[r][p + c]) * (wt[f][r][c] >> 4);
            sl += longint'(img[r][p + c]) * (wt[f][r][c] & 15);
          end
        hi = int'(sh / IC); if (hi > 255) hi = 255;
        lo = int'(sl / IC); if (lo > 255) lo = 255;
        y = hi * 16 + lo + bias;
        if (y < 0) y = 0;
        y = y >>> shift;
        expo.push_back(y > 255 ? 255 : y);
      end
    send(CMD_START, 0, 0);
    while (busy) @(posedge clk);
    #1;
    check(int'(out_count) == NPOS * NF, $sformatf("out_count %0d want %0d", out_count, NPOS * NF));
    for (int i = 0; i < expo.size(); i++) begin
      obuf_re = 1; obuf_raddr = 11'(i);
      @(posedge clk); #1;
      obuf_re = 0;
      check(int'(obuf_rdata) == expo[i], $sformatf("position %0d filter %0d: %0d want %0d", i / NF, i % NF, obuf_rdata, expo[i]));
    end
    check(int'(ibuf_rd_cnt) == NR + (NPOS - 1) * K,
          $sformatf("buffer reads %0d want %0d (without reuse: %0d)", ibuf_rd_cnt, NR + (NPOS - 1) * K, NPOS * K * K));
    check(int'(xfer_cnt) == K * (NPOS - 1), "transfer pulses");
    begin
      int nz;
      nz = 0;
      foreach (expo[i]) if (expo[i] != 0) nz++;
      check(nz > expo.size() / 2, $sformatf("test data gives mostly non-zero outputs (%0d of %0d)", nz, expo.size()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
