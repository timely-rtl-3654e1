// tb_output_buffer: self-checking test of the sub-chip output buffer, a
// 2048-byte memory with one write port and a single read port (one byte per clock).
// How: the buffer is filled with random bytes, then random mixes of writes and
// reads are checked against a model array. Reads return data one clock after
// re. Uses the paper's size (2 KB per sub-chip). Choices: access mix.
module tb_output_buffer;
  localparam int DEPTH = 2048;
  logic clk = 0;
  logic we, re;
  logic [10:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  logic [7:0] model [DEPTH];
  int checks = 0, failures = 0;

  output_buffer #(.DEPTH(DEPTH), .W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [10:0] a;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(posedge clk); #1;
      we = 1; waddr = 11'(i); wdata = 8'($urandom); model[i] = wdata;
    end
    for (int i = 0; i < 6000; i++) begin
      @(posedge clk); #1;
      we = ($urandom % 3) == 0;
      waddr = 11'($urandom); wdata = 8'($urandom);
      re = 1;
      a = (i == 0) ? 11'(DEPTH - 1) : 11'($urandom);
      raddr = a;
      if (we && (waddr == a)) we = 0;  // avoid read-during-write
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      we = 0; re = 0;
      checks++;
      if (rdata != model[a]) begin
        failures++;
        $display("addr %0d: got %0h want %0h", a, rdata, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
