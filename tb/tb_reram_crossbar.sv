// tb_reram_crossbar: self-checking test of the behavioural ReRAM crossbar
// model. The paper's crossbar sums, on each bit line, the charge of every
// row's time-domain input times the cell conductance (4-bit cells); here a
// column's charge is sum_i(high ticks of row i) * w[i][j].
// How: an 8x8 crossbar gets random 4-bit weights through the write port, then
// several phases of random row activity (clr on the first tick, eval on the
// last) are compared with a reference sum. Weights are rewritten between
// phases to exercise the write port. Choices: B=8, phase lengths.
module tb_reram_crossbar;
  localparam int B = 8;
  logic clk = 0;
  logic we, clr, eval;
  logic [2:0] wrow, wcol;
  logic [3:0] wdata;
  logic [B-1:0] rows;
  logic [B-1:0][31:0] q;
  int wm[B][B];
  int checks = 0, failures = 0;

  reram_crossbar #(.B(B), .WBITS(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int hi[B], len, p;
    longint e;
    we = 0; clr = 0; eval = 0; rows = '0; wrow = '0; wcol = '0; wdata = '0;
    for (int ph = 0; ph < 30; ph++) begin
      for (int i = 0; i < B; i++)
        for (int j = 0; j < B; j++)
          if (ph == 0 || $urandom % 4 == 0) begin
            @(posedge clk); #1;
            we = 1; wrow = 3'(i); wcol = 3'(j); wdata = 4'($urandom);
            if (ph == 1) wdata = 4'd15;
            wm[i][j] = int'(wdata);
          end
      @(posedge clk); #1;
      we = 0;
      len = 1 + $urandom % 600;
      foreach (hi[i]) hi[i] = 0;
      for (int t = 0; t < len; t++) begin
        clr = (t == 0);
        eval = (t == len - 1);
        for (int i = 0; i < B; i++) begin
          p = ph % 3 == 0 ? 100 : $urandom % 100;
          rows[i] = ($urandom % 100) < p;
          if (rows[i]) hi[i]++;
        end
        @(posedge clk); #1;
      end
      clr = 0; eval = 0; rows = '0;
      for (int j = 0; j < B; j++) begin
        e = 0;
        for (int i = 0; i < B; i++) e += longint'(hi[i]) * wm[i][j];
        checks++;
        if (longint'(q[j]) != e) begin
          failures++; $display("phase %0d col %0d: %0d want %0d", ph, j, q[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
