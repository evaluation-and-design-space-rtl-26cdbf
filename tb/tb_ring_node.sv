// tb_ring_node: one ring station (address 5, 8 ns clock) between a send unit
// and a receive unit driven by the test (10 ns clock). Five kinds of packet
// go through: a command for this station (taken: payload on cmd_data, an
// empty packet leaves), a command for another station (passes unchanged), an
// empty packet while the module offers a result (filled with {RESULT, 5} and
// the result, res_taken pulses once), an empty packet with no result waiting
// (passes), and another station's result packet (passes). Expected packets
// are written out here.
module tb_ring_node;
  import noc_pkg::*;
  logic tclk = 0, nclk = 0, rst_n = 0;
  logic in_req, in_ack, out_req, out_ack;
  logic [7:0] in_bus, out_bus;
  logic t_valid = 0, t_ready, r_valid;
  logic [7:0] t_data = '0, r_data;
  logic cmd_valid, res_valid = 0, res_taken;
  logic [23:0] cmd_data, res_data = '0;
  int checks = 0, failures = 0, taken = 0, cmds = 0;
  logic [7:0] got[$];
  always #5 tclk = ~tclk;
  always #4 nclk = ~nclk;
  hs4_tx u_src (.clk(tclk), .rst_n, .valid(t_valid), .ready(t_ready), .data(t_data), .req_o(in_req), .data_o(in_bus), .ack_i(in_ack));
  ring_node #(.MY_ADDR(6'd5)) dut (.clk(nclk), .rst_n, .req_i(in_req), .data_i(in_bus), .ack_o(in_ack),
    .req_o(out_req), .data_o(out_bus), .ack_i(out_ack), .cmd_valid, .cmd_data, .res_valid, .res_data, .res_taken);
  hs4_rx u_snk (.clk(tclk), .rst_n, .req_i(out_req), .data_i(out_bus), .ack_o(out_ack), .valid(r_valid), .ready(1'b1), .data(r_data));
  initial begin #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge tclk) if (rst_n && r_valid) got.push_back(r_data);
  logic [23:0] last_cmd;
  always @(posedge nclk) if (rst_n) begin
    if (res_taken) taken++;
    if (cmd_valid) begin cmds++; last_cmd = cmd_data; end
  end

  task automatic send_pkt(input logic [7:0] f0, f1, f2, f3);
    logic [7:0] f[4]; f = '{f0, f1, f2, f3};
    for (int k = 0; k < 4; k++) begin
      @(negedge tclk); t_valid = 1; t_data = f[k];
      @(posedge tclk); while (!t_ready) @(posedge tclk);
      @(negedge tclk); t_valid = 0;
    end
  endtask

  task automatic expect_pkt(input logic [7:0] f0, f1, f2, f3, input string what);
    int w = 0;
    while (got.size() < 4 && w < 2000) begin @(posedge tclk); w++; end
    checks++;
    if (got.size() < 4 || got[0] != f0 || got[1] != f1 || got[2] != f2 || got[3] != f3) begin
      failures++; $display("FAIL %s: got %p", what, got);
    end
    got.delete();
  endtask

  initial begin
    #23 rst_n = 1;
    send_pkt({RP_CMD, 6'd5}, 8'h12, 8'h34, 8'h56);
    expect_pkt({RP_EMPTY, 6'd0}, 8'h00, 8'h00, 8'h00, "own command becomes empty packet");
    checks++; if (cmds != 1 || last_cmd != 24'h123456) begin failures++; $display("FAIL command delivery %0d %h", cmds, last_cmd); end
    send_pkt({RP_CMD, 6'd7}, 8'hAA, 8'hBB, 8'hCC);
    expect_pkt({RP_CMD, 6'd7}, 8'hAA, 8'hBB, 8'hCC, "other command passes");
    checks++; if (cmds != 1) begin failures++; $display("FAIL took a foreign command"); end
    send_pkt({RP_EMPTY, 6'd0}, 8'h00, 8'h00, 8'h00);
    expect_pkt({RP_EMPTY, 6'd0}, 8'h00, 8'h00, 8'h00, "empty passes without result");
    @(negedge nclk); res_valid = 1; res_data = 24'hC0FFEE;
    fork
      begin @(posedge nclk); while (!res_taken) @(posedge nclk); @(negedge nclk); res_valid = 0; res_data = 24'h0; end
      send_pkt({RP_EMPTY, 6'd0}, 8'h00, 8'h00, 8'h00);
    join
    expect_pkt({RP_RESULT, 6'd5}, 8'hC0, 8'hFF, 8'hEE, "empty filled with result");
    checks++; if (taken != 1) begin failures++; $display("FAIL res_taken %0d times", taken); end
    send_pkt({RP_RESULT, 6'd2}, 8'h01, 8'h02, 8'h03);
    expect_pkt({RP_RESULT, 6'd2}, 8'h01, 8'h02, 8'h03, "other result passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
