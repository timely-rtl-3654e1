// tb_controller: self-checking test of the sub-chip controller, which keeps
// the tick/window/cycle counters, the configuration registers and the
// pipeline stage flags (A load, B DTC + phase I, C phase II + TDC, D post-
// processing), raises xfer pulses for the O2IR input transfer and stalls the
// pipeline at a cycle boundary while inputs or the previous result are not
// ready.
// How: NROWS=8, GAMMA=2, 300-tick windows. Each layer writes random
// configuration through CFG commands (read back from the cfg outputs),
// starts, and runs with random loader_done/post_idle levels. At every cycle
// boundary a reference model predicts stall, cycle start or finish; the test
// checks cyc_start, the four stage flags for the model's cycle number, the
// stall and xfer counters (stride pulses per B cycle from the second on),
// the number of cycles (NCYC+3), one done pulse and busy falling.
// Interface/timing: commands are one-clock bus_req_t words; all checks are
// made at the falling edge. Choices of this testbench: sizes and random mix.
module tb_controller;
  import timely_pkg::*;
  localparam int NR = 8, G = 2, CT = 300, TW = $clog2(CT);
  logic clk = 0, rst_n = 0;
  bus_req_t cmd;
  logic loader_done, post_idle;
  logic [TW-1:0] wtick;
  logic [0:0] win_idx;
  logic phi, win_start, win_end, cyc_start, cyc_last, layer_start;
  logic st_a, st_b, st_c, st_d, xfer, reuse_a, reuse_b, busy, done;
  logic [15:0] cfg_ncyc, cfg_nout;
  logic [3:0] cfg_stride, cfg_pool, cfg_shift;
  logic signed [15:0] cfg_bias;
  logic cfg_relu, cfg_fwd;
  logic [6:0] cfg_dest;
  logic [NR-1:0] cfg_replay;
  logic [31:0] stall_cnt, xfer_cnt;
  int checks = 0, failures = 0;

  controller #(.NROWS(NR), .GAMMA(G), .CONV_TICKS(CT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200_000_000;
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

  initial begin
    int ncyc, stride, k, nstall, nxfer, ncs, ndone, s0, x0;
    logic [NR-1:0] rp;
    logic exp_stall;
    cmd = '0; loader_done = 0; post_idle = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int layer = 0; layer < 6; layer++) begin
      ncyc = (layer == 0) ? 1 : 1 + $urandom % 5;
      stride = 1 + $urandom % 4;
      rp = NR'($urandom);
      send(CMD_CFG, CFG_NCYC, 16'(ncyc));
      send(CMD_CFG, CFG_STRIDE, 16'(stride));
      send(CMD_CFG, CFG_NOUT, 16'(layer * 7 + 3));
      send(CMD_CFG, CFG_POOL, 16'(layer + 1));
      send(CMD_CFG, CFG_SHIFT, 16'(layer + 2));
      send(CMD_CFG, CFG_BIAS, -16'(layer * 100));
      send(CMD_CFG, CFG_RELU, 16'(layer % 2));
      send(CMD_CFG, CFG_DEST, 16'(layer + 40));
      send(CMD_CFG, CFG_FWD, 16'(layer % 2));
      for (int r = 0; r < NR; r++) send(CMD_CFG, CFG_REPLAY + 32'(r), 16'(rp[r]));
      check(cfg_ncyc == 16'(ncyc) && cfg_stride == 4'(stride) && cfg_nout == 16'(layer * 7 + 3) &&
            cfg_pool == 4'(layer + 1) && cfg_shift == 4'(layer + 2) && cfg_bias == -16'(layer * 100) &&
            cfg_relu == 1'(layer % 2) && cfg_dest == 7'(layer + 40) && cfg_fwd == 1'(layer % 2) &&
            cfg_replay == rp, "configuration registers");
      s0 = int'(stall_cnt); x0 = int'(xfer_cnt);
      k = 0; nstall = 0; nxfer = 0; ncs = 0; ndone = 0;
      send(CMD_START, 0, 0);
      check(busy, "busy after start");
      while (busy) begin
        loader_done = ($urandom % 3) != 0;
        post_idle   = ($urandom % 3) != 0;
        @(negedge clk);
        exp_stall = 0;
        if (wtick == '0 && win_idx == '0) begin
          exp_stall = k != 0 && ((k - 1 < ncyc && !loader_done) || !post_idle);
          if (exp_stall) nstall++;
          check(cyc_start == (!exp_stall && k != ncyc + 3), $sformatf("cycle start at k=%0d", k));
          if (cyc_start) begin
            ncs++;
            check(st_a == (k < ncyc) && st_b == (k >= 1 && k <= ncyc) &&
                  st_c == (k >= 2 && k <= ncyc + 1) && st_d == (k >= 3 && k <= ncyc + 2) &&
                  reuse_a == (k >= 2) && reuse_b == (k >= 2),
                  $sformatf("stage flags at cycle %0d", k));
          end
        end else begin
          check(!cyc_start, "cycle start mid-cycle");
        end
        check(phi == (wtick == '0) && win_start == (wtick == '0 && !exp_stall) && win_end == (wtick == TW'(CT - 1)),
              "window strobes");
        if (xfer) begin
          nxfer++;
          check(st_b && k >= 2 && win_idx == '0 && int'(wtick) >= 1 && int'(wtick) <= stride, "xfer timing");
        end
        if (cyc_last) k++;
        @(posedge clk); #1;
        if (done) ndone++;
      end
      check(ncs == ncyc + 3, $sformatf("cycles %0d want %0d", ncs, ncyc + 3));
      check(int'(stall_cnt) - s0 == nstall, $sformatf("stall_cnt %0d want %0d", int'(stall_cnt) - s0, nstall));
      check(int'(xfer_cnt) - x0 == nxfer && nxfer == stride * (ncyc - 1),
            $sformatf("xfer %0d want %0d", nxfer, stride * (ncyc - 1)));
      check(ndone == 1 && phi, "one done pulse, idle afterwards");
      check(nstall > 0 || ncyc == 1, "stalls occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
