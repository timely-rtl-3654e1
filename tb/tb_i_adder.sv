// tb_i_adder: self-checking test of the current adder (I-adder) model that
// sums the column charges of the vertically stacked crossbars of one column
// group ("I-adders ... sum up the currents"). NIN=3 inputs, B=4 columns.
// How: random charges are applied and every output is compared with the
// integer sum. Combinational; checked #1 after each change.
module tb_i_adder;
  localparam int NIN = 3, B = 4;
  logic [NIN-1:0][B-1:0][31:0] qin;
  logic [B-1:0][31:0] qout;
  int checks = 0, failures = 0;

  i_adder #(.NIN(NIN), .B(B)) dut (.*);

  initial begin
    #10_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint e;
    for (int it = 0; it < 2000; it++) begin
      for (int n = 0; n < NIN; n++)
        for (int j = 0; j < B; j++) qin[n][j] = $urandom % (1 << 24);
      #1;
      for (int j = 0; j < B; j++) begin
        e = 0;
        for (int n = 0; n < NIN; n++) e += qin[n][j];
        checks++;
        if (longint'(qout[j]) != e) begin
          failures++; $display("col %0d: %0d want %0d", j, qout[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
