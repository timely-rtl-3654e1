// tb_x_subbuf: self-checking test of the X-subBuf, the time-domain latch
// between neighbouring crossbars. The paper: "a pair of cross-coupled
// inverters" plus "a switch" ... that "buffer the time-domain inputs"; the
// transfer column additionally records each row's pulse width so that O2IR
// ("only once input read") can pass inputs to the next row group.
// How, part 1 (latch, XFER_EN=1, replay off): random pulses that start at a
// random tick and may drop early must come out held high from their first
// high tick to the end of the window; phi (first tick) clears the latch.
// Part 2 (transfer): rows of window s get DTC-style pulses of random width
// (up to 299 ticks, so the 8-bit saturation shows); then xfer is pulsed k
// times with every row in replay mode; in the following windows row r must
// re-emit, in window r%GAMMA, the width recorded for row r+k (0 past the end)
// and ignore its own input.
// Interface/timing: inputs change just after a rising edge, outputs are read
// at the falling edge. Choices of this testbench: B=8, GAMMA=2, 300 ticks.
module tb_x_subbuf;
  localparam int B = 8, G = 2, CT = 300, TW = $clog2(CT);
  logic clk = 0, rst_n = 0;
  logic phi, win_end, xfer;
  logic [TW-1:0] wtick;
  logic [0:0] win_idx;
  logic [B-1:0] replay, tin, tout;
  int checks = 0, failures = 0;

  x_subbuf #(.B(B), .GAMMA(G), .CONV_TICKS(CT), .DBITS(8), .XFER_EN(1'b1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #80_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int cnt[B], t0[B], len[B], wid[B][G];

  task automatic run_window(input int s, input bit pulses);
    win_idx = 1'(s);
    foreach (cnt[r]) cnt[r] = 0;
    for (int t = 0; t < CT; t++) begin
      wtick = TW'(t);
      phi = (t == 0);
      win_end = (t == CT - 1);
      for (int r = 0; r < B; r++) begin
        if (pulses) tin[r] = (t >= t0[r]) && (t < t0[r] + len[r]);
        else        tin[r] = 1'($urandom);
      end
      @(negedge clk);
      for (int r = 0; r < B; r++) if (tout[r]) cnt[r]++;
      @(posedge clk); #1;
    end
    win_end = 0;
  endtask

  initial begin
    int k, e;
    phi = 0; win_end = 0; xfer = 0; wtick = '0; win_idx = '0; replay = '0; tin = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // part 1: set-latch behaviour
    for (int w = 0; w < 20; w++) begin
      for (int r = 0; r < B; r++) begin
        t0[r]  = 1 + $urandom % (CT + 20);      // may never start
        len[r] = 1 + $urandom % 40;
      end
      run_window(w % G, 1);
      for (int r = 0; r < B; r++) begin
        e = (t0[r] < CT) ? CT - t0[r] : 0;
        checks++;
        if (cnt[r] != e) begin
          failures++; $display("latch w%0d r%0d: %0d want %0d", w, r, cnt[r], e);
        end
      end
    end
    // part 2: record, shift, replay
    for (int rep = 0; rep < 6; rep++) begin
      replay = '0;
      for (int s = 0; s < G; s++) begin
        for (int r = 0; r < B; r++) begin
          wid[r][s] = (r % G == s) ? $urandom % CT : 0;
          if (rep == 0 && r == 2 * G + s) wid[r][s] = CT - 1;   // saturating width
          t0[r] = CT - wid[r][s];
          len[r] = CT;
        end
        run_window(s, 1);
      end
      k = 1 + $urandom % 3;
      replay = '1;
      phi = 1; wtick = '0;
      for (int i = 0; i < k; i++) begin
        xfer = 1;
        @(posedge clk); #1;
      end
      xfer = 0;
      for (int s = 0; s < G; s++) begin
        run_window(s, 0);
        for (int r = 0; r < B; r++) begin
          e = 0;
          if (r % G == s && r + k < B) begin
            e = wid[r + k][(r + k) % G];
            if (e > 255) e = 255;
          end
          checks++;
          if (cnt[r] != e) begin
            failures++;
            $display("replay rep%0d k%0d window %0d row %0d: %0d want %0d", rep, k, s, r, cnt[r], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
