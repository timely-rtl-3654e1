// maxpool: max pooling over a stream of results.
//
// Every pool_n consecutive valid inputs produce one output, their maximum,
// with out_valid on the tick after the last input of the group. pool_n of 0
// or 1 passes every input through (one-tick latency). clear restarts a group.
//
// Follows the paper: one max-pooling unit after the ReLU. Own choice: the
// pooling window is a run of consecutive results of the stream; the mapping is
// expected to order outputs so that one window's values arrive together.
module maxpool #(
  parameter int W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [3:0]          pool_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] din,
  output logic                out_valid,
  output logic signed [W-1:0] dout
);
  logic [3:0]          cnt;
  logic signed [W-1:0] cur;
  logic signed [W-1:0] m;
  logic [3:0]          n_eff;

  assign n_eff = (pool_n == 4'd0) ? 4'd1 : pool_n;
  assign m     = (cnt == 4'd0 || din > cur) ? din : cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      cur       <= '0;
      out_valid <= 1'b0;
      dout      <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        cnt <= '0;
      end else if (in_valid) begin
        if (cnt + 4'd1 >= n_eff) begin
          dout      <= m;
          out_valid <= 1'b1;
          cnt       <= '0;
        end else begin
          cur <= m;
          cnt <= cnt + 4'd1;
        end
      end
    end
  end
endmodule
