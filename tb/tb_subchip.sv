// tb_subchip: self-checking test of one TIMELY sub-chip: controller, input
// buffer and loader, shared DTC banks, X-subBufs with O2IR input transfer,
// ReRAM crossbars, I-adders, charging/comparison, shared TDC banks, post-
// processing (shift-and-add, ReLU, max pooling, requantisation) and the
// output buffer.
// How: a reduced sub-chip (B=8, 2x2 crossbars, GAMMA=2, 300-tick windows,
// so 16 input rows and 16 columns) is programmed over its command port with
// random 4-bit weights and run for several layers of 4 pipeline cycles with
// random stride, replay rows, bias, ReLU, pool size, shift and output count.
// A reference model in this testbench computes, for every cycle, the input
// vector (fresh rows from the buffer, replayed rows = the vector of the
// previous cycle moved up by the stride inside each crossbar's 8 rows, 0 past
// the end), the column results min(255, floor(sum x*w / (16*15))), the
// post-processing and the bytes the output buffer must hold. Some layers get
// their inputs written slowly after START, so the loader has to wait and the
// pipeline must stall. The test reads the output buffer back and checks the
// output count and the event counters (transfers, DTC conversions, buffer
// reads, ReLU zeroings, pool outputs, stalls) and the forwarding request.
// Interface/timing: commands are one clock each on `cmd`; buffer reads
// return data one clock after obuf_re. Choices of this testbench: all sizes
// and random mixes; the arithmetic is the design's (see the RTL headers).
module tb_subchip;
  import timely_pkg::*;
  localparam int B = 8, NV = 2, NH = 2, G = 2, CT = 300;
  localparam int NR = B * NV, NC = B * NH, IC = NR * 15;
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

  int wm[NR][NC];
  byte unsigned ibytes[$];
  int slow;

  initial begin
    localparam int NCYC = 4;
    int x[NCYC][NR], code[NC], stride, nout, pool, shift, bias, relu_on, fwd;
    int y, mcur, mcnt, nexp, nrelu, npool, nconv, nfresh;
    int s0, x0, c0, r0, l0, p0;
    logic [NR-1:0] rp;
    int expo[$];
    cmd = '0; obuf_re = 0; obuf_raddr = '0; fwd_ack = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int layer = 0; layer < 6; layer++) begin
      // weights
      for (int i = 0; i < NR; i++)
        for (int c = 0; c < NC; c++)
          if (layer == 0 || $urandom % 3 == 0) begin
            wm[i][c] = $urandom % 16;
            send(CMD_WEIGHT, {16'((i / B) * NH + c / B), 8'(i % B), 8'(c % B)}, 16'(wm[i][c]));
          end
      stride  = 1 + $urandom % 2;
      nout    = (layer % 2 == 0) ? NC / 2 : 1 + $urandom % (NC / 2);
      pool    = (layer == 1) ? 0 : 1 + $urandom % 3;
      shift   = 1 + $urandom % 3;
      bias    = int'($urandom % 1600) - 1200;
      relu_on = (layer % 3) != 2;
      fwd     = layer % 2;
      slow    = (layer % 2) == 1;
      rp      = NR'($urandom);
      if (layer == 0) rp = '0;
      // inputs and reference vectors
      ibytes.delete();
      for (int k = 0; k < NCYC; k++)
        for (int i = 0; i < NR; i++) begin
          if (k > 0 && rp[i]) begin
            x[k][i] = (i % B + stride < B) ? x[k-1][i + stride] : 0;
          end else begin
            x[k][i] = $urandom % 256;
            ibytes.push_back(byte'(x[k][i]));
          end
        end
      send(CMD_CFG, CFG_NCYC, 16'(NCYC));
      send(CMD_CFG, CFG_STRIDE, 16'(stride));
      send(CMD_CFG, CFG_NOUT, 16'(nout));
      send(CMD_CFG, CFG_POOL, 16'(pool));
      send(CMD_CFG, CFG_SHIFT, 16'(shift));
      send(CMD_CFG, CFG_BIAS, 16'(bias));
      send(CMD_CFG, CFG_RELU, 16'(relu_on));
      send(CMD_CFG, CFG_DEST, 16'(layer + 3));
      send(CMD_CFG, CFG_FWD, 16'(fwd));
      for (int i = 0; i < NR; i++) send(CMD_CFG, CFG_REPLAY + 32'(i), 16'(rp[i]));
      // expected outputs
      expo.delete();
      mcnt = 0; mcur = 0; nrelu = 0; npool = 0; nconv = 0; nfresh = ibytes.size();
      for (int k = 0; k < NCYC; k++) begin
        for (int i = 0; i < NR; i++) if (k == 0 || !rp[i]) nconv++;
        for (int c = 0; c < NC; c++) begin
          longint q;
          q = 0;
          for (int i = 0; i < NR; i++) q += longint'(x[k][i]) * wm[i][c];
          code[c] = int'(q / IC);
          if (code[c] > 255) code[c] = 255;
        end
        for (int j = 0; j < nout; j++) begin
          y = code[2 * j] * 16 + code[2 * j + 1] + bias;
          if (relu_on && y < 0) begin y = 0; nrelu++; end
          if (mcnt == 0 || y > mcur) mcur = y;
          mcnt++;
          if (mcnt >= (pool == 0 ? 1 : pool)) begin
            y = mcur >>> shift;
            expo.push_back(y < 0 ? 0 : y > 255 ? 255 : y);
            if (pool > 1) npool++;
            mcnt = 0;
          end
        end
      end
      s0 = int'(stall_cnt); x0 = int'(xfer_cnt); c0 = int'(dtc_conv_cnt);
      r0 = int'(ibuf_rd_cnt); l0 = int'(relu_cnt); p0 = int'(pool_cnt);
      if (!slow)
        for (int a = 0; a < ibytes.size(); a++) send(CMD_INPUT, 32'(a), 16'(ibytes[a]));
      send(CMD_START, 0, 0);
      if (slow)
        for (int a = 0; a < ibytes.size(); a++) begin
          repeat (60) @(posedge clk);
          #1;
          send(CMD_INPUT, 32'(a), 16'(ibytes[a]));
        end
      while (busy) @(posedge clk);
      #1;
      check(int'(out_count) == expo.size(), $sformatf("layer %0d: out_count %0d want %0d", layer, out_count, expo.size()));
      for (int a = 0; a < expo.size(); a++) begin
        obuf_re = 1; obuf_raddr = 11'(a);
        @(posedge clk); #1;
        obuf_re = 0;
        check(int'(obuf_rdata) == expo[a], $sformatf("layer %0d output %0d: %0d want %0d", layer, a, obuf_rdata, expo[a]));
      end
      check(int'(xfer_cnt) - x0 == stride * (NCYC - 1), "transfer count");
      check(int'(dtc_conv_cnt) - c0 == nconv, $sformatf("DTC conversions %0d want %0d", int'(dtc_conv_cnt) - c0, nconv));
      check(int'(ibuf_rd_cnt) - r0 == nfresh, $sformatf("buffer reads %0d want %0d", int'(ibuf_rd_cnt) - r0, nfresh));
      check(int'(relu_cnt) - l0 == nrelu, $sformatf("relu count %0d want %0d", int'(relu_cnt) - l0, nrelu));
      check(int'(pool_cnt) - p0 == npool, $sformatf("pool count %0d want %0d", int'(pool_cnt) - p0, npool));
      check(slow ? (int'(stall_cnt) > s0) : (int'(stall_cnt) == s0), "stall only while inputs are missing");
      check(fwd_req == 1'(fwd) && (!fwd || fwd_dest == 7'(layer + 3)), "forward request");
      if (fwd_req) begin
        fwd_ack = 1;
        @(posedge clk); #1;
        fwd_ack = 0;
        check(!fwd_req, "forward request cleared by ack");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
