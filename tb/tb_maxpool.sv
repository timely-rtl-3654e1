// tb_maxpool: self-checking test of the streaming max-pooling unit.
// How: for pool sizes 0..6 a stream of random signed values, with random gaps
// in in_valid, is fed in; every pool_n consecutive valid inputs must give one
// output equal to their maximum (pool_n 0 and 1 pass values through). A clear
// between groups restarts the count. Expected results are queued by a model
// and compared when out_valid rises, and the counts must match at the end.
// Interface/timing: inputs change after a rising edge; the result appears one
// clock after the group's last input. Choices of this testbench: sizes, gaps.
module tb_maxpool;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid, out_valid;
  logic [3:0] pool_n;
  logic signed [15:0] din, dout;
  int checks = 0, failures = 0;
  logic signed [15:0] expq[$];
  int nout = 0;

  maxpool #(.W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    nout++;
    if (expq.size() == 0) begin
      failures++; $display("unexpected output %0d", dout);
    end else begin
      logic signed [15:0] e;
      e = expq.pop_front();
      if (dout != e) begin failures++; $display("got %0d want %0d", dout, e); end
    end
  end

  initial begin
    int n, want;
    logic signed [15:0] m;
    clear = 0; in_valid = 0; din = '0; pool_n = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p <= 6; p++) begin
      @(posedge clk); #1;
      pool_n = 4'(p); clear = 1; in_valid = 0;
      @(posedge clk); #1;
      clear = 0;
      n = (p == 0) ? 1 : p;
      for (int g = 0; g < 40; g++) begin
        for (int k = 0; k < n; k++) begin
          while ($urandom % 3 == 0) begin
            in_valid = 0; din = 16'($urandom);
            @(posedge clk); #1;
          end
          in_valid = 1;
          din = 16'($urandom);
          if (k == 0 || din > m) m = din;
          if (k == n - 1) expq.push_back(m);
          @(posedge clk); #1;
        end
        in_valid = 0;
      end
      repeat (3) @(posedge clk);
    end
    want = 40 * 7;
    checks++;
    if (nout != want || expq.size() != 0) begin
      failures++; $display("output count %0d want %0d", nout, want);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
