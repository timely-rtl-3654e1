// post_unit: stage D of the sub-chip pipeline, from TDC codes to the output buffer.
//
// Collect: during a stage-C cycle the TDC banks deliver, at the end of each
// window, the codes of columns k*GAMMA+s of every crossbar column; they are
// stored by their sub-chip column index h*B + c. When the last window's codes
// have arrived the file is copied to a second file and streaming starts while
// the next cycle is collected.
// Stream: one result per tick for j = 0 .. nout-1, the pair of columns 2j (upper
// weight bits) and 2j+1 (lower weight bits) goes through the shifter-adder,
// the ReLU and the max-pooling unit; each pooled value is shifted right by
// `shift`, clamped to 0..2^DBITS-1 and written to the output buffer at the next
// address. out_count is the number of bytes written since layer_start.
//
// Follows the paper: the shift-and-add, ReLU and max-pooling block between the
// TDCs and the output buffer. Own choices: column pairing, one result per tick,
// requantisation to the 8-bit input format of the next layer.
module post_unit #(
  parameter int NCB_H = 12,
  parameter int B     = 256,
  parameter int GAMMA = 8,
  parameter int DBITS = 8,
  parameter int WBITS = 4,
  parameter int OAW   = 11,
  localparam int GW   = (GAMMA > 1) ? $clog2(GAMMA) : 1,
  localparam int ND   = B / GAMMA,
  localparam int NC   = NCB_H * B
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                layer_start,
  input  logic                                capture,    // stage C this window
  input  logic                                win_end,
  input  logic [NCB_H-1:0][ND-1:0][DBITS-1:0] tdc_codes,
  input  logic                                tdc_valid,
  input  logic [GW-1:0]                       tdc_win,
  input  logic [15:0]                         nout,
  input  logic [3:0]                          pool_n,
  input  logic [3:0]                          shift,
  input  logic signed [15:0]                  bias,
  input  logic                                relu_en,
  output logic                                obuf_we,
  output logic [OAW-1:0]                      obuf_waddr,
  output logic [DBITS-1:0]                    obuf_wdata,
  output logic [OAW:0]                        out_count,
  output logic                                idle,
  output logic [31:0]                         relu_cnt,
  output logic [31:0]                         pool_cnt
);
  logic [NC-1:0][DBITS-1:0] col_a, col_b;
  logic        cap_q;
  logic        go;
  logic        streaming;
  logic [15:0] j;
  logic        mp_in_v;
  logic signed [15:0] sa_y, relu_y, mp_in, mp_y;
  logic        mp_v;
  logic signed [15:0] shifted;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cap_q <= 1'b0;
    else        cap_q <= capture && win_end;
  end

  // collect
  always_ff @(posedge clk) begin
    if (tdc_valid && cap_q)
      for (int h = 0; h < NCB_H; h++)
        for (int k = 0; k < ND; k++)
          col_a[h*B + k*GAMMA + int'(tdc_win)] <= tdc_codes[h][k];
    if (go) col_b <= col_a;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) go <= 1'b0;
    else        go <= tdc_valid && cap_q && tdc_win == GW'(GAMMA - 1);
  end

  // stream
  shift_add #(.DBITS(DBITS), .WBITS(WBITS), .W(16)) u_sa (
    .msb  (col_b[2*int'(j)]),
    .lsb  (col_b[2*int'(j) + 1]),
    .bias (bias),
    .y    (sa_y)
  );
  relu #(.W(16)) u_relu (.en(relu_en), .x(sa_y), .y(relu_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      streaming <= 1'b0;
      j         <= '0;
      mp_in_v   <= 1'b0;
      mp_in     <= '0;
      relu_cnt  <= '0;
    end else begin
      mp_in_v <= 1'b0;
      if (go) begin
        streaming <= nout != '0;
        j         <= '0;
      end else if (streaming) begin
        mp_in_v <= 1'b1;
        mp_in   <= relu_y;
        if (relu_en && sa_y < 0) relu_cnt <= relu_cnt + 1;
        if (j + 16'd1 >= nout) streaming <= 1'b0;
        j <= j + 16'd1;
      end
    end
  end

  maxpool #(.W(16)) u_mp (
    .clk, .rst_n,
    .clear     (layer_start),
    .pool_n    (pool_n),
    .in_valid  (mp_in_v),
    .din       (mp_in),
    .out_valid (mp_v),
    .dout      (mp_y)
  );

  // requantise and write
  assign shifted    = mp_y >>> shift;
  assign obuf_we    = mp_v;
  assign obuf_waddr = out_count[OAW-1:0];
  assign obuf_wdata = (shifted < 0) ? '0 :
                      (shifted > 16'sd255) ? DBITS'(255) : DBITS'(shifted);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_count <= '0;
      pool_cnt  <= '0;
    end else begin
      if (layer_start) out_count <= '0;
      else if (mp_v)   out_count <= out_count + 1'b1;
      if (mp_v && pool_n > 4'd1) pool_cnt <= pool_cnt + 1;
    end
  end

  assign idle = !go && !streaming && !mp_in_v && !mp_v;

  initial assert (B % 2 == 0 && B % GAMMA == 0) else $error("bad B");
endmodule
