// tb_dtc_bank: self-checking test of the shared DTC bank. The paper shares
// one DTC among GAMMA rows ("each DTC is shared by gamma rows"); here B=8
// rows, GAMMA=2, so 4 converters each serve rows k*2+s in window s.
// How: windows are stepped tick by tick with random codes, skip masks and run
// flags. For each row the testbench counts high ticks and checks that only
// the rows of the live window pulse, each for exactly its code (0 if skipped
// or not running), and that conv_cnt grows by the number of conversions made.
// Interface/timing: codes/skip/run/win_idx are applied before the window's
// first tick (win_start) and held; rows are sampled at every falling edge.
// Choices of this testbench: reduced B, GAMMA and a 300-tick window.
module tb_dtc_bank;
  localparam int B = 8, G = 2, CT = 300, TW = $clog2(CT);
  logic clk = 0, rst_n = 0;
  logic [TW-1:0] wtick;
  logic win_start, run;
  logic [0:0] win_idx;
  logic [B-1:0][7:0] codes;
  logic [B-1:0] skip, rows;
  logic [31:0] conv_cnt;
  int checks = 0, failures = 0;

  dtc_bank #(.B(B), .GAMMA(G), .CONV_TICKS(CT), .DBITS(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int cnt[B];
    int nconv, c0;
    wtick = '0; win_start = 0; run = 0; win_idx = '0; codes = '0; skip = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nconv = 0;
    @(posedge clk); #1;
    c0 = int'(conv_cnt);
    for (int w = 0; w < 60; w++) begin
      win_idx = 1'(w % G);
      run = (w % 7) != 3;
      for (int r = 0; r < B; r++) begin
        codes[r] = 8'($urandom);
        skip[r]  = ($urandom % 4) == 0;
      end
      foreach (cnt[r]) cnt[r] = 0;
      for (int t = 0; t < CT; t++) begin
        wtick = TW'(t);
        win_start = (t == 0);
        @(negedge clk);
        for (int r = 0; r < B; r++) if (rows[r]) cnt[r]++;
        @(posedge clk); #1;
      end
      for (int r = 0; r < B; r++) begin
        int e;
        e = (r % G == w % G && run && !skip[r]) ? int'(codes[r]) : 0;
        if (r % G == w % G && run && !skip[r]) nconv++;
        checks++;
        if (cnt[r] != e) begin
          failures++;
          $display("window %0d row %0d: %0d high ticks, want %0d", w, r, cnt[r], e);
        end
      end
    end
    wtick = '0; win_start = 1; run = 0;
    @(posedge clk); #1;
    checks++;
    if (int'(conv_cnt) - c0 != nconv) begin
      failures++;
      $display("conv_cnt %0d want %0d", int'(conv_cnt) - c0, nconv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
