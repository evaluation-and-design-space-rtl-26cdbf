// tb_output_switch: four VC queues hold packets (unique tag in the first data
// byte); the PN side takes flits with a random ready. Checks that packets
// come out whole and never interleaved, with pm_sop on the header and pm_eop
// on the last flit, that all packets come out, that the VCs are served in
// round-robin order when all hold packets, and that with ready high a packet
// leaves one flit per cycle.
module tb_output_switch;
  import noc_pkg::*;
  localparam int NV = 4;
  logic clk = 0, rst_n = 0;
  logic [NV-1:0] vc_empty, vc_pop;
  logic [7:0] vc_flit [NV];
  logic pm_valid, pm_ready = 0, pm_sop, pm_eop;
  logic [7:0] pm_flit;
  int checks = 0, failures = 0, got = 0, sent = 0, gaps = 0;
  logic [7:0] q [NV][$];
  logic [7:0] pkts [int][$];
  logic [7:0] cur[$];
  int order[$];
  int src_of [int];
  always #5 clk = ~clk;
  output_switch #(.N_VC(NV)) dut (.clk, .rst_n, .vc_empty, .vc_flit, .vc_pop, .pm_valid, .pm_ready, .pm_flit, .pm_sop, .pm_eop);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_comb for (int v = 0; v < NV; v++) begin
    vc_empty[v] = (q[v].size() == 0);
    vc_flit[v]  = vc_empty[v] ? 8'h00 : q[v][0];
  end

  function automatic int flits_of(logic [7:0] h);
    case (h[7:6]) 2'b00: return 9; 2'b11: return 3; default: return 8; endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int v = 0; v < NV; v++) if (vc_pop[v]) void'(q[v].pop_front());
    if (pm_valid && pm_ready) begin
      checks++;
      if (pm_sop != (cur.size() == 0)) begin failures++; $display("FAIL sop"); end
      cur.push_back(pm_flit);
      checks++;
      if (pm_eop != (cur.size() == flits_of(cur[0]))) begin failures++; $display("FAIL eop"); end
      if (cur.size() == flits_of(cur[0])) begin
        int tag; tag = int'(cur[1]);
        checks++;
        if (!pkts.exists(tag) || pkts[tag] != cur) begin failures++; $display("FAIL packet %0d", tag); end
        else begin pkts.delete(tag); order.push_back(src_of[tag]); end
        got++;
        cur.delete();
      end
    end
    if (pm_ready && cur.size() != 0 && !pm_valid) gaps++;
  end

  initial begin
    static int tag = 0;
    #17 rst_n = 1;
    for (int n = 0; n < 8; n++)
      for (int v = 0; v < NV; v++) begin
        logic [1:0] id; int nf;
        id = 2'($urandom); nf = (id == 2'b00) ? 9 : (id == 2'b11) ? 3 : 8;
        pkts[tag] = '{ {id, 2'd0, 4'h1} };
        pkts[tag].push_back(8'(tag));
        for (int d = 2; d < nf - 1; d++) pkts[tag].push_back(8'($urandom_range(0, 8'h99)));
        pkts[tag].push_back(8'hFF);
        src_of[tag] = v;
        for (int f = 0; f < pkts[tag].size(); f++) q[v].push_back(pkts[tag][f]);
        tag++; sent++;
      end
    // first 12 packets with ready always high: check rate and RR order
    @(negedge clk); pm_ready = 1;
    while (got < 12) @(negedge clk);
    checks++;
    if (gaps != 0) begin failures++; $display("FAIL %0d bubbles inside packets", gaps); end
    for (int k = 1; k < 12; k++) begin
      checks++;
      if (order[k] != (order[k-1] + 1) % NV) begin failures++; $display("FAIL round robin %0d after %0d", order[k], order[k-1]); end
    end
    while (got < sent) begin @(negedge clk); pm_ready = ($urandom_range(0, 2) != 0); end
    checks++;
    if (got != sent) begin failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
