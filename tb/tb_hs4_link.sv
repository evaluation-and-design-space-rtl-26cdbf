// tb_hs4_link: a send unit (10 ns clock) talks to a receive unit (7 ns clock)
// over the four-phase link. 300 random flits are offered with random gaps
// and taken with a ready that drops for long stretches; the test checks that they arrive in order
// and unchanged, and checks the four-phase protocol on every edge of either
// clock: req rises only while ack is low, ack rises only while req is high,
// req falls only while ack is high, ack falls only while req is low, and the
// data does not change while req is high.
module tb_hs4_link;
  logic tclk = 0, rclk = 0, rst_n = 0;
  logic valid = 0, ready, req, ack, rvalid, rready = 0;
  logic [7:0] data = '0, bus, rdata;
  logic [7:0] q[$];
  int checks = 0, failures = 0, got = 0, cycles = 0;
  always #5 tclk = ~tclk;
  always #3.5 rclk = ~rclk;
  hs4_tx u_tx (.clk(tclk), .rst_n, .valid, .ready, .data, .req_o(req), .data_o(bus), .ack_i(ack));
  hs4_rx u_rx (.clk(rclk), .rst_n, .req_i(req), .data_i(bus), .ack_o(ack), .valid(rvalid), .ready(rready), .data(rdata));
  initial begin #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic preq = 0, pack = 0; logic [7:0] pbus = '0;
  always @(posedge tclk or posedge rclk) if (rst_n) begin
    if (req && !preq) begin checks++; if (pack) begin failures++; $display("FAIL req rose while ack high"); end end
    if (!req && preq) begin checks++; if (!pack) begin failures++; $display("FAIL req fell before ack"); end end
    if (ack && !pack) begin checks++; if (!preq) begin failures++; $display("FAIL ack rose without req"); end end
    if (!ack && pack) begin checks++; if (preq) begin failures++; $display("FAIL ack fell while req high"); end end
    if (req && preq && bus != pbus) begin checks++; failures++; $display("FAIL data changed during req"); end
    preq = req; pack = ack; pbus = bus;
  end

  always @(posedge tclk) if (rst_n && valid && ready) q.push_back(data);
  always @(posedge rclk) if (rst_n && rvalid && rready) begin
    checks++;
    if (q.size() == 0 || rdata != q[0]) begin failures++; $display("FAIL flit %h", rdata); end
    if (q.size() != 0) void'(q.pop_front());
    got++;
  end
  always @(posedge tclk) cycles++;

  initial begin
    #23 rst_n = 1;
    fork
      for (int n = 0; n < 300; n++) begin
        @(negedge tclk);
        while ($urandom_range(0, 3) == 0) @(negedge tclk);
        valid = 1; data = 8'($urandom);
        @(posedge tclk); while (!ready) @(posedge tclk);
        @(negedge tclk); valid = 0;
      end
      forever begin
        // ready mostly high, with long low stretches so that flits wait
        @(negedge rclk); rready = 1;
        repeat ($urandom_range(1, 30)) @(negedge rclk);
        rready = 0;
        repeat ($urandom_range(1, 40)) @(negedge rclk);
      end
    join_any
    repeat (50) @(negedge tclk);
    checks++;
    if (got != 300) begin failures++; $display("FAIL %0d of 300 flits", got); end
    $display("300 flits in %0d sender cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
