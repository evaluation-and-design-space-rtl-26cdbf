// tb_main_switch: four inputs (queues standing in for the input FIFOs) send
// packets of random types to random processing nodes through one main
// switch; the eight output VCs are modelled as 4-flit buffers drained at
// random, so VCs fill up and stall. Each packet carries a unique tag in its
// first data byte. The test rebuilds packets per VC and checks that each one
// arrives whole and unchanged, on a VC of its destination PN (VC/2 = p), that
// packets on one VC never interleave, and that every packet arrives. It also
// counts contention (two headers for the same PN waiting together) and
// measures the header's route latency (grant one cycle after it appears).
module tb_main_switch;
  import noc_pkg::*;
  localparam int NI = 4, NV = 8, VB = 4;
  logic clk = 0, rst_n = 0;
  logic [NI-1:0] in_empty, in_pop;
  logic [7:0]    in_flit [NI];
  logic [NV-1:0] out_full, out_drained, out_push;
  logic [7:0]    out_flit [NV];
  vc_state_t     st [NV];
  int checks = 0, failures = 0, contention = 0, full_cycles = 0;
  logic [7:0] inq [NI][$];
  logic [7:0] vcq [NV][$];
  logic [7:0] cur [NV][$];
  logic [7:0] pkts [int][$];
  int pkt_p [int];
  int arrived = 0, sent = 0;
  always #5 clk = ~clk;
  main_switch dut (.clk, .rst_n, .in_empty, .in_flit, .in_pop, .out_full, .out_drained, .out_push, .out_flit, .vc_state(st));
  initial begin #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_comb begin
    for (int i = 0; i < NI; i++) begin
      in_empty[i] = (inq[i].size() == 0);
      in_flit[i]  = in_empty[i] ? 8'h00 : inq[i][0];
    end
    for (int v = 0; v < NV; v++) begin
      out_full[v]    = (vcq[v].size() >= VB);
      out_drained[v] = (vcq[v].size() == 0);
    end
  end

  function automatic int flits_of(logic [7:0] h);
    case (h[7:6]) 2'b00: return 9; 2'b11: return 3; default: return 8; endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    int hp [NI]; int waiting;
    for (int i = 0; i < NI; i++) if (in_pop[i]) void'(inq[i].pop_front());
    for (int v = 0; v < NV; v++) if (out_full[v]) full_cycles++;
    for (int v = 0; v < NV; v++) if (out_push[v]) begin
      checks++;
      if (out_full[v]) begin failures++; $display("FAIL push into full VC %0d", v); end
      vcq[v].push_back(out_flit[v]);
      cur[v].push_back(out_flit[v]);
      if (cur[v].size() == flits_of(cur[v][0])) begin
        int tag; tag = int'(cur[v][1]);
        checks++;
        if (!pkts.exists(tag)) begin failures++; $display("FAIL unknown packet tag %0d on VC %0d", tag, v); end
        else begin
          if (cur[v] != pkts[tag]) begin failures++; $display("FAIL packet %0d corrupted or interleaved", tag); end
          checks++;
          if (v / 2 != pkt_p[tag]) begin failures++; $display("FAIL packet %0d to PN %0d on VC %0d", tag, pkt_p[tag], v); end
          pkts.delete(tag);
          arrived++;
        end
        cur[v].delete();
      end
    end
    // drain output VCs at random
    for (int v = 0; v < NV; v++) if (vcq[v].size() != 0 && $urandom_range(0, 3) == 0) void'(vcq[v].pop_front());
    // contention: two inputs with a header at the head for the same PN, both waiting
    waiting = 0;
    for (int i = 0; i < NI; i++) hp[i] = (dut.req[i]) ? int'(in_flit[i][5:4]) : -1;
    for (int a = 0; a < NI; a++) for (int b = a + 1; b < NI; b++) if (hp[a] >= 0 && hp[a] == hp[b]) waiting = 1;
    if (waiting != 0) contention++;
  end

  initial begin
    static int tag = 0;
    #17 rst_n = 1;
    // route latency: one packet on an idle switch
    begin
      static int lat = 0;
      inq[0].push_back({2'b11, 2'd3, 4'h0}); inq[0].push_back(8'd200); inq[0].push_back(8'hFF);
      pkts[200] = '{ {2'b11, 2'd3, 4'h0}, 8'd200, 8'hFF }; pkt_p[200] = 3; sent++;
      @(negedge clk);
      while (!out_push[6] && !out_push[7] && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 1) begin failures++; $display("FAIL header crossed %0d cycles after arriving, expected 1", lat); end
    end
    for (int n = 0; n < 30; n++)
      for (int i = 0; i < NI; i++) begin
        logic [1:0] id, p; int nf;
        id = 2'($urandom); p = 2'($urandom_range(0, 3));
        if (n < 5) p = 2'd1;   // a burst of packets for one PN forces contention
        nf = (id == 2'b00) ? 9 : (id == 2'b11) ? 3 : 8;
        pkts[tag] = '{ {id, p, 4'h2} };
        pkts[tag].push_back(8'(tag));
        for (int d = 2; d < nf - 1; d++) pkts[tag].push_back(8'($urandom_range(0, 8'h99)));
        pkts[tag].push_back(8'hFF);
        pkt_p[tag] = int'(p);
        for (int f = 0; f < pkts[tag].size(); f++) inq[i].push_back(pkts[tag][f]);
        tag++; sent++;
      end
    repeat (3000) @(negedge clk);
    checks++;
    if (arrived != sent) begin failures++; $display("FAIL %0d of %0d packets arrived", arrived, sent); end
    checks++;
    if (contention == 0) begin failures++; $display("FAIL no contention exercised"); end
    checks++;
    if (full_cycles == 0) begin failures++; $display("FAIL no full VC exercised"); end
    $display("contention cycles %0d, full-VC cycles %0d", contention, full_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
