// tb_tdc_bank: self-checking test of the shared TDC bank (one TDC per GAMMA
// columns, as the paper shares its TDCs). B=8 columns, GAMMA=2: TDC k reads
// column k*2+s in window s.
// How: every window drives all columns with random patterns and checks, one
// tick after win_end, that valid rises, res_win names the window, and code k
// equals the saturated high-tick count of column k*2+s. Columns of the other
// window are driven too and must be ignored.
// Interface/timing: win_idx is held for the whole window; results are read at
// the falling edge one tick after win_end. Choices: reduced sizes, patterns.
module tb_tdc_bank;
  localparam int B = 8, G = 2, CT = 300, ND = B / G;
  logic clk = 0, rst_n = 0;
  logic win_start, win_end, valid;
  logic [0:0] win_idx, res_win;
  logic [B-1:0] cols;
  logic [ND-1:0][7:0] codes;
  int checks = 0, failures = 0;

  tdc_bank #(.B(B), .GAMMA(G), .CONV_TICKS(CT), .DBITS(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int cnt[B], thr[B];
    win_start = 0; win_end = 0; win_idx = '0; cols = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 60; w++) begin
      @(posedge clk); #1;
      win_idx = 1'(w % G);
      foreach (cnt[r]) begin cnt[r] = 0; thr[r] = $urandom % (CT + 1); end
      for (int t = 0; t < CT; t++) begin
        win_start = (t == 0);
        win_end   = (t == CT - 1);
        for (int r = 0; r < B; r++) begin
          cols[r] = t >= CT - thr[r];
          if (cols[r]) cnt[r]++;
        end
        @(posedge clk); #1;
      end
      win_start = 0; win_end = 0; cols = '0;
      @(negedge clk);
      checks++;
      if (!valid || res_win != 1'(w % G)) begin
        failures++; $display("window %0d: valid %0d res_win %0d", w, valid, res_win);
      end
      for (int k = 0; k < ND; k++) begin
        int e;
        e = cnt[k * G + w % G];
        if (e > 255) e = 255;
        checks++;
        if (int'(codes[k]) != e) begin
          failures++; $display("window %0d tdc %0d: %0d want %0d", w, k, codes[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
