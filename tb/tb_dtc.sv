// tb_dtc: self-checking test of one digital-to-time converter.
// How: a 300-tick window (the smallest the converter allows for 8-bit codes)
// is stepped tick by tick. For every window a random code and enable are given
// on the window's first tick; the testbench counts the ticks on which the
// output is high and checks that it equals the code (0 when disabled) and that
// the pulse is one run that ends on the window's last tick, as the converter's
// delay-line model says: an input D becomes a pulse of D unit delays.
// Interface/timing: drives wtick, win_start, en, code just after a rising
// edge and samples tout at the falling edge. A watchdog ends a hung run.
// Choices of this testbench, not the paper: window length and window count.
module tb_dtc;
  localparam int CT = 300;
  localparam int TW = $clog2(CT);
  logic clk = 0, rst_n = 0;
  logic [TW-1:0] wtick;
  logic win_start, en;
  logic [7:0] code;
  logic tout;
  int checks = 0, failures = 0;

  dtc #(.CONV_TICKS(CT), .DBITS(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int cnt, first, last;
    logic [7:0] c;
    logic e;
    wtick = '0; win_start = 0; en = 0; code = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 200; w++) begin
      c = 8'($urandom);
      if (w < 4) c = (w == 0) ? 8'd0 : (w == 1) ? 8'd255 : (w == 2) ? 8'd1 : 8'd128;
      e = ($urandom % 5) != 0;
      cnt = 0; first = -1; last = -1;
      for (int t = 0; t < CT; t++) begin
        @(posedge clk); #1;
        wtick = TW'(t);
        win_start = (t == 0);
        en = e; code = c;
        if (t != 0) begin en = $urandom; code = 8'($urandom); end  // ignored mid-window
        @(negedge clk);
        if (tout) begin
          cnt++;
          if (first < 0) first = t;
          last = t;
        end
      end
      checks++;
      if (cnt != (e ? int'(c) : 0)) begin
        failures++;
        $display("window %0d: code %0d en %0d -> %0d high ticks", w, c, e, cnt);
      end
      if (cnt > 0) begin
        checks++;
        if (last != CT - 1 || last - first + 1 != cnt) begin
          failures++;
          $display("window %0d: pulse not contiguous/aligned first=%0d last=%0d", w, first, last);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
