// tb_subchip_bus: self-checking test of the chip bus that connects the host
// and the sub-chips. Host commands pass straight through while the bus is
// idle; otherwise a finished sub-chip's forwarding request is served in
// round-robin order by copying its output buffer (out_count bytes) into the
// destination sub-chip's input buffer with CMD_INPUT words and then sending
// CMD_START to the destination, with a one-clock fwd_ack to the source.
// How: NSUB=3, 16-byte buffers. The testbench models the sources' output
// buffers (one-clock read latency), raises random forwarding requests with
// random lengths (including 0) and destinations, interleaves host commands,
// and checks every copied byte, its address and destination, the START, the
// ack, the round-robin order when all three request at once, that host
// commands pass unchanged only when host_ready is high, and fwd_cnt.
// Interface/timing: inputs change after a rising edge; the bus output is
// sampled at the falling edge. Choices of this testbench: sizes and mixes.
module tb_subchip_bus;
  import timely_pkg::*;
  localparam int NS = 3, OAW = 4;
  logic clk = 0, rst_n = 0;
  bus_req_t host_req, bus;
  logic host_ready, src_re;
  logic [NS-1:0] fwd_req, fwd_ack;
  logic [NS-1:0][6:0] fwd_dest;
  logic [NS-1:0][OAW:0] out_count;
  logic [1:0] src_sel;
  logic [OAW-1:0] src_raddr;
  logic [7:0] src_rdata;
  logic [31:0] fwd_cnt;
  logic [7:0] mem [NS][16];
  int checks = 0, failures = 0;

  subchip_bus #(.NSUB(NS), .OAW(OAW)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (src_re) src_rdata <= mem[src_sel][src_raddr];

  initial begin
    #100_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // scoreboard of the bus traffic
  int nxfer = 0, copied[$], order[$], host_seen = 0, host_sent = 0;
  always @(negedge clk) if (rst_n) begin
    if (host_req.valid && host_ready) begin
      host_seen++;
      check(bus == host_req, "host command passed through");
    end
    if (bus.valid && bus.cmd == CMD_INPUT) begin
      check(!host_ready && int'(bus.addr) == copied.size(), "copy address in order");
      copied.push_back(int'(bus.data));
    end
    if (bus.valid && bus.cmd == CMD_START && !host_ready) begin
      int s;
      s = -1;
      for (int i = 0; i < NS; i++) if (fwd_ack[i]) s = (s == -1) ? i : -2;
      check(s >= 0, "one ack with the start");
      if (s >= 0) begin
        check(bus.sub == fwd_dest[s], "start goes to the destination");
        check(copied.size() == int'(out_count[s]), $sformatf("copied %0d bytes want %0d", copied.size(), out_count[s]));
        foreach (copied[a]) check(copied[a] == int'(mem[s][a]), "copied byte");
        order.push_back(s);
      end
      copied.delete();
      nxfer++;
    end else begin
      check(fwd_ack == '0, "no ack without start");
    end
  end

  // sources: request stays up until acknowledged
  always @(posedge clk) for (int i = 0; i < NS; i++) if (fwd_ack[i]) fwd_req[i] <= 1'b0;

  initial begin
    int n0;
    host_req = '0; fwd_req = '0; fwd_dest = '0; out_count = '0;
    foreach (mem[s, a]) mem[s][a] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // all three at once: round robin from 0
    for (int s = 0; s < NS; s++) begin
      fwd_dest[s] = 7'(10 + s);
      out_count[s] = 5'(1 + $urandom % 16);
    end
    fwd_req = '1;
    while (fwd_req != '0) @(posedge clk);
    repeat (3) @(posedge clk); #1;
    check(order.size() == 3 && order[0] == 0 && order[1] == 1 && order[2] == 2, "round-robin order");
    // random traffic with host commands in between
    for (int it = 0; it < 300; it++) begin
      @(posedge clk); #1;
      host_req = '0;
      for (int s = 0; s < NS; s++)
        if (!fwd_req[s] && $urandom % 20 == 0) begin
          for (int a = 0; a < 16; a++) mem[s][a] = 8'($urandom);
          out_count[s] = 5'($urandom % 17);
          fwd_dest[s] = 7'($urandom % 100);
          fwd_req[s] = 1'b1;
        end
      if ($urandom % 4 == 0 && host_ready) begin
        host_req = '{valid: 1'b1, sub: 7'($urandom), cmd: CMD_CFG, addr: $urandom, data: 16'($urandom)};
        host_sent++;
      end
    end
    @(posedge clk); #1;
    host_req = '0;
    while (fwd_req != '0) @(posedge clk);
    repeat (3) @(posedge clk); #1;
    check(host_seen == host_sent, "every host command seen");
    check(int'(fwd_cnt) == nxfer && nxfer > 10, $sformatf("fwd_cnt %0d transfers %0d", fwd_cnt, nxfer));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
