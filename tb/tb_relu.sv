// tb_relu: self-checking test of the ReLU unit: negative inputs become 0 when
// enabled, everything passes unchanged when disabled. Random signed inputs,
// combinational, checked #1 after each change. Choice of this testbench:
// operand count.
module tb_relu;
  logic en;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0;

  relu #(.W(16)) dut (.*);

  initial begin
    #10_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      en = (i % 4) != 0;
      x = 16'($urandom);
      if (i == 1) x = -16'sd1;
      if (i == 2) x = 16'sd0;
      #1;
      checks++;
      if (y != ((en && x < 0) ? 16'sd0 : x)) begin
        failures++;
        $display("en %0d x %0d -> %0d", en, x, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
