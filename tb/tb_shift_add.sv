// tb_shift_add: self-checking test of the shift-and-add unit that joins the
// two 4-bit-weight column results of one output into one value,
// y = msb*16 + lsb + bias, saturated to the 16-bit signed range.
// How: random and corner operands are applied and compared with a reference
// computed in 32-bit integers. Purely combinational; values settle in #1.
// Choices of this testbench: operand mix and count.
module tb_shift_add;
  logic [7:0] msb, lsb;
  logic signed [15:0] bias, y;
  int checks = 0, failures = 0;

  shift_add #(.DBITS(8), .WBITS(4), .W(16)) dut (.*);

  initial begin
    #10_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int r;
    for (int i = 0; i < 5000; i++) begin
      msb = 8'($urandom); lsb = 8'($urandom);
      case (i % 4)
        0: bias = 16'($urandom);
        1: bias = 16'sd32767;
        2: bias = -16'sd32768;
        default: bias = 16'(int'($urandom % 512) - 256);
      endcase
      #1;
      r = int'(msb) * 16 + int'(lsb) + int'(bias);
      if (r > 32767) r = 32767;
      if (r < -32768) r = -32768;
      checks++;
      if (int'(y) != r) begin
        failures++;
        $display("msb %0d lsb %0d bias %0d -> %0d want %0d", msb, lsb, bias, y, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
