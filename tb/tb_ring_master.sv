// tb_ring_master: the control station (6 ns clock) with the rest of the ring
// modelled by the test (9 ns clock): every packet the master sends is
// received and, once three packets have gathered, sent back at a random
// pace, with empty packets filled
// with a result {RESULT, addr 3} every other time. The test checks that
// queued commands go out as {CMD, dest} packets with their payload, in
// order, that empty packets are sent when no command waits, that never more
// than four packets are in flight, that the ring is kept full (four in
// flight reached), and that every result sent back is reported once.
module tb_ring_master;
  import noc_pkg::*;
  logic mclk = 0, rclk = 0, rst_n = 0;
  logic m_req, m_ack, b_req, b_ack;
  logic [7:0] m_bus, b_bus;
  logic cmd_valid = 0, cmd_ready, res_valid;
  logic [5:0] cmd_dest = '0, res_src;
  logic [23:0] cmd_data = '0, res_data;
  logic [7:0] in_flight;
  logic r_valid, t_valid = 0, t_ready;
  logic [7:0] r_data, t_data = '0;
  int checks = 0, failures = 0, max_fl = 0, results_sent = 0, results_seen = 0, empties = 0;
  logic [7:0] pkt [$];
  logic [7:0] back [$];
  logic [31:0] exp_cmd [$];
  logic [23:0] exp_res [$];
  always #3 mclk = ~mclk;
  always #4.5 rclk = ~rclk;
  ring_master dut (.clk(mclk), .rst_n, .req_o(m_req), .data_o(m_bus), .ack_i(m_ack), .req_i(b_req), .data_i(b_bus), .ack_o(b_ack),
    .cmd_valid, .cmd_ready, .cmd_dest, .cmd_data, .res_valid, .res_src, .res_data, .in_flight);
  hs4_rx u_rx (.clk(rclk), .rst_n, .req_i(m_req), .data_i(m_bus), .ack_o(m_ack), .valid(r_valid), .ready(1'b1), .data(r_data));
  hs4_tx u_tx (.clk(rclk), .rst_n, .valid(t_valid), .ready(t_ready), .data(t_data), .req_o(b_req), .data_o(b_bus), .ack_i(b_ack));
  initial begin #3000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ring model: collect packets, check commands, queue them to come back
  int fill_toggle = 0;
  always @(posedge rclk) if (rst_n && r_valid) begin
    pkt.push_back(r_data);
    if (pkt.size() == 4) begin
      ring_header_t h; h = ring_header_t'(pkt[0]);
      if (h.kind == RP_CMD) begin
        checks++;
        if (exp_cmd.size() == 0 || {pkt[0][5:0], pkt[1], pkt[2], pkt[3]} != {exp_cmd[0][29:0]}) begin
          failures++; $display("FAIL command packet %p", pkt);
        end
        if (exp_cmd.size() != 0) void'(exp_cmd.pop_front());
        foreach (pkt[k]) back.push_back(pkt[k]);
      end else begin
        empties++;
        fill_toggle++;
        if (fill_toggle % 2 == 0) begin
          logic [23:0] r; r = 24'($urandom);
          back.push_back({RP_RESULT, 6'd3}); back.push_back(r[23:16]); back.push_back(r[15:8]); back.push_back(r[7:0]);
          exp_res.push_back(r); results_sent++;
        end else foreach (pkt[k]) back.push_back(pkt[k]);
      end
      pkt.delete();
    end
  end
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge rclk);
      if (back.size() >= 12 && $urandom_range(0, 1) != 0) begin
        t_valid = 1; t_data = back[0];
        @(posedge rclk); while (!t_ready) @(posedge rclk);
        void'(back.pop_front());
        @(negedge rclk); t_valid = 0;
      end
    end
  end
  always @(posedge mclk) if (rst_n) begin
    if (int'(in_flight) > max_fl) max_fl = int'(in_flight);
    checks++;
    if (in_flight > 8'd4) begin failures++; $display("FAIL %0d packets in flight", in_flight); end
    if (res_valid) begin
      checks++;
      if (exp_res.size() == 0 || res_data != exp_res[0] || res_src != 6'd3) begin failures++; $display("FAIL result %h", res_data); end
      if (exp_res.size() != 0) void'(exp_res.pop_front());
      results_seen++;
    end
  end

  initial begin
    #23 rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      repeat ($urandom_range(0, 60)) @(negedge mclk);
      cmd_valid = 1; cmd_dest = 6'($urandom_range(1, 9)); cmd_data = 24'($urandom);
      exp_cmd.push_back({2'b01, cmd_dest, cmd_data});
      @(posedge mclk); while (!cmd_ready) @(posedge mclk);
      @(negedge mclk); cmd_valid = 0;
    end
    repeat (3000) @(negedge mclk);
    checks++; if (exp_cmd.size() != 0) begin failures++; $display("FAIL %0d commands not sent", exp_cmd.size()); end
    checks++; if (max_fl != 4) begin failures++; $display("FAIL at most %0d packets in flight", max_fl); end
    checks++; if (empties == 0) begin failures++; $display("FAIL no empty packet"); end
    checks++; if (results_seen == 0 || results_seen + exp_res.size() != results_sent) begin failures++; $display("FAIL results %0d of %0d", results_seen, results_sent); end
    $display("results %0d, empty packets %0d", results_seen, empties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
