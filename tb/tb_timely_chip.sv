// tb_timely_chip: end-to-end test of the TIMELY chip: host bus, sub-chips,
// forwarding of one layer's outputs to the next sub-chip, and read-back.
// How: a reduced chip (3 sub-chips of 2x2 crossbars with B=8, GAMMA=2,
// 300-tick windows) runs a two-layer network. The host programs weights and
// configuration of sub-chip 0 (layer 1: 6 cycles, stride 1 with replayed
// rows, ReLU, 2-way max pooling) and sub-chip 1 (layer 2: 2 cycles), starts
// sub-chip 0 and only then feeds its input bytes, slowly, so its pipeline has
// to stall for inputs. Sub-chip 0 forwards its 24 output bytes over the bus
// into sub-chip 1's input buffer and starts it. A reference model computes
// both layers (the same arithmetic as tb_subchip); the test reads both
// output buffers through the chip read port and compares every byte.
// Mechanism counts: every one must happen at least once or the test fails:
//   O2IR transfer   - xfer pulses (stat_xfer) and fewer buffer reads than rows
//   DTC sharing     - window starts with win_idx != 0 in a conversion cycle,
//                     i.e. a DTC converting a second row of its group
//   pipeline overlap- cycle starts with three or more stages active at once
//   forwarding      - bus transfers (fwd_cnt)
//   ReLU            - values zeroed (stat_relu)
//   pooling         - pooled outputs (stat_pool)
//   stall           - stalled ticks (stat_stall)
// The stage and window signals are observed through hierarchical names.
// Interface/timing: host commands are sent only while host_ready is high;
// read data returns one clock after rd_en. Choices: all sizes and values.
module tb_timely_chip;
  import timely_pkg::*;
  localparam int NS = 3, B = 8, NV = 2, NH = 2, G = 2, CT = 300;
  localparam int NR = B * NV, NC = B * NH, IC = NR * 15;
  logic clk = 0, rst_n = 0;
  bus_req_t host_req;
  logic host_ready, rd_en;
  logic [6:0] rd_sub;
  logic [10:0] rd_addr;
  logic [7:0] rd_data;
  logic [NS-1:0] done, busy;
  logic [31:0] fwd_cnt, stat_stall, stat_xfer, stat_conv, stat_rd, stat_relu, stat_pool;
  int checks = 0, failures = 0;

  timely_chip #(.NSUB(NS), .B(B), .NCB_V(NV), .NCB_H(NH), .GAMMA(G), .CONV_TICKS(CT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send(input int sub, input cmd_e c, input logic [31:0] a, input logic [15:0] d);
    while (!host_ready) @(posedge clk);
    #1;
    host_req = '{valid: 1'b1, sub: 7'(sub), cmd: c, addr: a, data: d};
    @(posedge clk); #1;
    host_req = '0;
  endtask

  // ---- mechanism monitors ----
  int n_share = 0, n_overlap = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.g_sub[0].u_sub.win_start && dut.g_sub[0].u_sub.st_b && dut.g_sub[0].u_sub.win_idx != '0) n_share++;
    if (dut.g_sub[1].u_sub.win_start && dut.g_sub[1].u_sub.st_b && dut.g_sub[1].u_sub.win_idx != '0) n_share++;
    if (dut.g_sub[0].u_sub.cyc_start &&
        (int'(dut.g_sub[0].u_sub.st_a) + int'(dut.g_sub[0].u_sub.st_b) +
         int'(dut.g_sub[0].u_sub.st_c) + int'(dut.g_sub[0].u_sub.st_d)) >= 3) n_overlap++;
  end

  // ---- reference model of one layer on one sub-chip ----
  typedef struct {
    int ncyc, stride, nout, pool, shift, bias, relu;
    logic [NR-1:0] rp;
    int w[NR][NC];
  } layer_t;

  // consumes fresh input bytes in order, returns output bytes
  function automatic void run_model(input layer_t L, input int inb[$], output int outb[$],
                                    output int nfresh);
    int x[NR], xp[NR], code[NC], y, mcur, mcnt, p;
    outb.delete();
    p = 0; mcnt = 0; mcur = 0;
    for (int k = 0; k < L.ncyc; k++) begin
      xp = x;
      for (int i = 0; i < NR; i++)
        if (k > 0 && L.rp[i]) x[i] = (i % B + L.stride < B) ? xp[i + L.stride] : 0;
        else begin x[i] = inb[p]; p++; end
      for (int c = 0; c < NC; c++) begin
        longint q;
        q = 0;
        for (int i = 0; i < NR; i++) q += longint'(x[i]) * L.w[i][c];
        code[c] = int'(q / IC);
        if (code[c] > 255) code[c] = 255;
      end
      for (int j = 0; j < L.nout; j++) begin
        y = code[2 * j] * 16 + code[2 * j + 1] + L.bias;
        if (L.relu != 0 && y < 0) y = 0;
        if (mcnt == 0 || y > mcur) mcur = y;
        mcnt++;
        if (mcnt >= (L.pool == 0 ? 1 : L.pool)) begin
          y = mcur >>> L.shift;
          outb.push_back(y < 0 ? 0 : y > 255 ? 255 : y);
          mcnt = 0;
        end
      end
    end
    nfresh = p;
  endfunction

  task automatic program_sub(input int sub, input layer_t L, input int fwd, input int dest);
    for (int i = 0; i < NR; i++)
      for (int c = 0; c < NC; c++)
        send(sub, CMD_WEIGHT, {16'((i / B) * NH + c / B), 8'(i % B), 8'(c % B)}, 16'(L.w[i][c]));
    send(sub, CMD_CFG, CFG_NCYC, 16'(L.ncyc));
    send(sub, CMD_CFG, CFG_STRIDE, 16'(L.stride));
    send(sub, CMD_CFG, CFG_NOUT, 16'(L.nout));
    send(sub, CMD_CFG, CFG_POOL, 16'(L.pool));
    send(sub, CMD_CFG, CFG_SHIFT, 16'(L.shift));
    send(sub, CMD_CFG, CFG_BIAS, 16'(L.bias));
    send(sub, CMD_CFG, CFG_RELU, 16'(L.relu));
    send(sub, CMD_CFG, CFG_DEST, 16'(dest));
    send(sub, CMD_CFG, CFG_FWD, 16'(fwd));
    for (int i = 0; i < NR; i++) send(sub, CMD_CFG, CFG_REPLAY + 32'(i), 16'(L.rp[i]));
  endtask

  task automatic read_back(input int sub, input int exp_b[$], input string name);
    for (int a = 0; a < exp_b.size(); a++) begin
      @(posedge clk); #1;
      rd_en = 1; rd_sub = 7'(sub); rd_addr = 11'(a);
      @(posedge clk); #1;
      rd_en = 0;
      check(int'(rd_data) == exp_b[a], $sformatf("%s byte %0d: %0d want %0d", name, a, rd_data, exp_b[a]));
    end
  endtask

  initial begin
    layer_t L1, L2;
    int in1[$], out1[$], out2[$], f1, f2, nrows_total;
    host_req = '0; rd_en = 0; rd_sub = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // layer 1: 6 cycles, stride 1, rows 0..6 of each crossbar replayed
    L1.ncyc = 6; L1.stride = 1; L1.nout = 8; L1.pool = 2; L1.shift = 2; L1.bias = -1200; L1.relu = 1;
    for (int i = 0; i < NR; i++) L1.rp[i] = (i % B) < B - 1;
    // layer 2: 2 cycles consuming the 24 forwarded bytes (16 + 8 fresh rows)
    L2.ncyc = 2; L2.stride = 2; L2.nout = 8; L2.pool = 1; L2.shift = 3; L2.bias = -300; L2.relu = 1;
    for (int i = 0; i < NR; i++) L2.rp[i] = i % 2 == 0;
    foreach (L1.w[i, c]) L1.w[i][c] = $urandom % 16;
    foreach (L2.w[i, c]) L2.w[i][c] = $urandom % 16;
    for (int a = 0; a < 64; a++) in1.push_back($urandom % 256);
    run_model(L1, in1, out1, f1);
    run_model(L2, out1, out2, f2);
    check(out1.size() == 24 && f2 == 24, "test set-up: layer 1 feeds layer 2 exactly");

    program_sub(0, L1, 1, 1);
    program_sub(1, L2, 0, 0);
    send(0, CMD_START, 0, 0);
    for (int a = 0; a < f1; a++) begin
      repeat (70) @(posedge clk);
      send(0, CMD_INPUT, 32'(a), 16'(in1[a]));
    end
    // sub-chip 0 finishes, forwards, sub-chip 1 runs
    wait (fwd_cnt == 1);
    @(posedge clk);
    while (busy[1]) @(posedge clk);
    repeat (5) @(posedge clk);
    read_back(0, out1, "layer 1");
    read_back(1, out2, "layer 2");

    nrows_total = NR * (L1.ncyc + L2.ncyc);
    $display("mechanisms: xfer=%0d share=%0d overlap=%0d fwd=%0d relu=%0d pool=%0d stall=%0d reads=%0d of %0d rows conv=%0d",
             stat_xfer, n_share, n_overlap, fwd_cnt, stat_relu, stat_pool, stat_stall, stat_rd, nrows_total, stat_conv);
    check(stat_xfer > 0 && int'(stat_rd) == f1 + f2 && int'(stat_rd) < nrows_total, "O2IR transfer happened");
    check(n_share > 0 && int'(stat_conv) == f1 + f2, "DTC sharing happened");
    check(n_overlap > 0, "pipeline overlap happened");
    check(fwd_cnt == 1, "forwarding happened");
    check(stat_relu > 0, "ReLU happened");
    check(stat_pool > 0, "pooling happened");
    check(stat_stall > 0, "stall happened");
    check(busy == '0, "all sub-chips idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
