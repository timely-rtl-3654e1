// tb_tdc: self-checking test of one time-to-digital converter.
// How: a 300-tick window is stepped tick by tick with a random input pattern
// whose high-tick count ranges past 255, so both the plain count and the
// saturation to the 8-bit maximum are exercised. One tick after the window's
// last tick the testbench expects valid=1 and code = min(high ticks, 255).
// Interface/timing: inputs change just after a rising edge; outputs are read
// at the falling edge of the tick after win_end. A watchdog ends a hung run.
// Choices of this testbench, not the paper: window length and patterns.
module tb_tdc;
  localparam int CT = 300;
  logic clk = 0, rst_n = 0;
  logic win_start, win_end, tin;
  logic [7:0] code;
  logic valid;
  int checks = 0, failures = 0;

  tdc #(.CONV_TICKS(CT), .DBITS(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int cnt, thr, exp_c;
    win_start = 0; win_end = 0; tin = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 200; w++) begin
      thr = $urandom % (CT + 1);
      cnt = 0;
      for (int t = 0; t < CT; t++) begin
        @(posedge clk); #1;
        win_start = (t == 0);
        win_end   = (t == CT - 1);
        tin       = (w % 3 == 0) ? (t >= CT - thr) : (($urandom % CT) < thr);
        if (tin) cnt++;
        if (t == 1) begin
          // result of the previous window is still held
          @(negedge clk);
          checks++;
          if (valid) begin failures++; $display("valid stuck high"); end
        end
      end
      @(posedge clk); #1;
      win_start = 0; win_end = 0; tin = 0;
      @(negedge clk);
      exp_c = cnt > 255 ? 255 : cnt;
      checks++;
      if (!valid || code != 8'(exp_c)) begin
        failures++;
        $display("window %0d: %0d high ticks -> code %0d valid %0d", w, cnt, code, valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
