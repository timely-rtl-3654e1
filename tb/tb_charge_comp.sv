// tb_charge_comp: self-checking test of the charging-and-comparison model
// (phase II of the paper: a second capacitor is charged by a fixed current
// until the comparator flips, turning a charge into a pulse width).
// Here: a column of charge Q, with IC = NROWS*WMAX per tick, gives a pulse of
// floor(Q/IC) ticks that ends at the window's end, in window j%GAMMA.
// How: B=4, GAMMA=2, NROWS=4 (IC=60), 300-tick window. Random charges up to
// 255*IC (and 0 and the exact maximum) are loaded, then every window counts
// high ticks per column; columns of the other window and cycles with active
// low must stay low. Choices of this testbench: sizes and charge mix.
module tb_charge_comp;
  localparam int B = 4, G = 2, CT = 300, NR = 4, WM = 15, IC = NR * WM, TW = $clog2(CT);
  logic clk = 0;
  logic load, active;
  logic [B-1:0][31:0] qin;
  logic [TW-1:0] wtick;
  logic [0:0] win_idx;
  logic [B-1:0] cmp;
  int checks = 0, failures = 0;

  charge_comp #(.B(B), .GAMMA(G), .CONV_TICKS(CT), .NROWS(NR), .WMAX(WM)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int cnt[B], e, ql[B];
    load = 0; active = 0; qin = '0; wtick = '0; win_idx = '0;
    for (int it = 0; it < 30; it++) begin
      @(posedge clk); #1;
      for (int j = 0; j < B; j++) qin[j] = $urandom % (255 * IC + 1);
      if (it == 0) begin qin[0] = 0; qin[1] = 255 * IC; qin[2] = IC - 1; qin[3] = IC; end
      for (int j = 0; j < B; j++) ql[j] = int'(qin[j]);
      load = 1;
      @(posedge clk); #1;
      load = 0;
      qin = '0;
      for (int s = 0; s < G; s++) begin
        active = (it % 5) != 4;
        win_idx = 1'(s);
        foreach (cnt[j]) cnt[j] = 0;
        for (int t = 0; t < CT; t++) begin
          wtick = TW'(t);
          @(negedge clk);
          for (int j = 0; j < B; j++) if (cmp[j]) cnt[j]++;
          @(posedge clk); #1;
        end
        for (int j = 0; j < B; j++) begin
          e = (active && j % G == s) ? ql[j] / IC : 0;
          checks++;
          if (cnt[j] != e) begin
            failures++;
            $display("load %0d window %0d col %0d (Q=%0d): %0d ticks want %0d", it, s, j, ql[j], cnt[j], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
