// tb_tdm_noc_wide: the data NoC with 16-bit flits instead of 8, to show that
// the flit width is a working parameter. Everything else is at its default
// (4 sources x 2 adapters, 2 main switches, 16 output VCs of 32 flits, 4
// processing nodes), with sources at 100 MHz, the NoC at 250 MHz and the
// processing nodes at 50 MHz.
//
// At 16 bits a packet is ceil(packet bits / 16) flits: 5 for a coefficient,
// 4 for original or compared data, 2 for a result. The header byte sits in
// the top 8 bits of the first flit and the last flit is padded with zeros.
// The scoreboard builds the expected flits the same way and compares every
// packet delivered to every processing node. As in the 8-bit test it counts
// each mechanism (packet types, both switches, all VC states, arbitration
// contention, a full output VC, source back-pressure, node stalls) and fails
// if one never happened, and it checks the 4-cycle route latency on an idle
// network.
module tb_tdm_noc_wide;
  import noc_pkg::*;
  localparam int NS = 4, NW = 2, NP = 4, DW = 56, FW = 16;

  logic src_clk [NS], src_rst_n [NS], pm_clk [NP], pm_rst_n [NP];
  logic noc_clk = 0, noc_rst_n = 0;
  logic        src_valid [NS][NW], src_ready [NS][NW];
  logic [1:0]  src_id [NS][NW], src_p [NS][NW];
  logic [3:0]  src_il [NS][NW];
  logic [DW-1:0] src_data [NS][NW];
  logic        pm_valid [NP], pm_ready [NP], pm_sop [NP], pm_eop [NP];
  logic [FW-1:0] pm_flit [NP];
  vc_state_t   vc_state [NW][8];

  int checks = 0, failures = 0;
  logic clk_s = 0, clk_p = 0;
  always #5 clk_s = ~clk_s;
  always #2 noc_clk = ~noc_clk;
  always #10 clk_p = ~clk_p;
  always_comb begin
    for (int s = 0; s < NS; s++) begin src_clk[s] = clk_s; src_rst_n[s] = noc_rst_n; end
    for (int m = 0; m < NP; m++) begin pm_clk[m] = clk_p; pm_rst_n[m] = noc_rst_n; end
  end

  tdm_noc_top #(.FLIT_W(FW)) dut (
    .src_clk, .src_rst_n, .noc_clk, .noc_rst_n, .pm_clk, .pm_rst_n,
    .src_valid, .src_ready, .src_id, .src_p, .src_int_length(src_il), .src_data,
    .pm_valid, .pm_ready, .pm_flit, .pm_sop, .pm_eop, .vc_state);

  task automatic check(input logic c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin repeat (250000) @(posedge noc_clk); failures++; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- scoreboard ----------------
  typedef logic [FW-1:0] flits_t[$];
  flits_t expected [NP][$];
  logic [FW-1:0] cur [NP][$];
  int sent = 0, received = 0, per_type [4], per_switch [NW];

  function automatic flits_t make_packet(logic [1:0] id, logic [1:0] p, logic [3:0] il, logic [DW-1:0] d);
    flits_t f; logic [127:0] pk;
    case (id)
      2'b00:        pk = {id, p, il, d[55:0], 8'hFF, 56'h0};
      2'b01, 2'b10: pk = {id, p, il, d[47:0], 8'hFF, 64'h0};
      default:      pk = {id, p, il, d[7:0], 8'hFF, 104'h0};
    endcase
    for (int k = 0; k < nb_flits(id, FW); k++) f.push_back(pk[127 - FW*k -: FW]);
    return f;
  endfunction

  always @(posedge clk_s) if (noc_rst_n)
    for (int s = 0; s < NS; s++) for (int k = 0; k < NW; k++)
      if (src_valid[s][k] && src_ready[s][k]) begin
        expected[src_p[s][k]].push_back(make_packet(src_id[s][k], src_p[s][k], src_il[s][k], src_data[s][k]));
        sent++;
      end

  always @(posedge clk_p) if (noc_rst_n)
    for (int m = 0; m < NP; m++) if (pm_valid[m] && pm_ready[m]) begin
      if (pm_sop[m] != (cur[m].size() == 0)) begin failures++; $display("FAIL sop at PN %0d", m); end
      cur[m].push_back(pm_flit[m]);
      if (pm_eop[m]) begin
        int hit; hit = -1;
        checks++;
        foreach (expected[m][e]) if (hit < 0 && expected[m][e] == cur[m]) hit = e;
        if (hit < 0) begin failures++; $display("FAIL unexpected packet at PN %0d (header %h)", m, cur[m][0]); end
        else begin expected[m].delete(hit); per_type[cur[m][0][FW-1 -: 2]]++; end
        checks++;
        if (int'(cur[m][0][FW-3 -: 2]) != m) begin failures++; $display("FAIL packet for PN %0d delivered to %0d", cur[m][0][FW-3 -: 2], m); end
        received++;
        cur[m].delete();
      end
    end

  // ---------------- mechanism counters ----------------
  int st_seen [4], contention = 0, vc_full_stall = 0, src_stall = 0, pm_stall = 0;
  always @(posedge noc_clk) if (noc_rst_n) begin
    for (int k = 0; k < NW; k++) for (int v = 0; v < 8; v++) st_seen[vc_state[k][v]]++;
    if (|(dut.g_sw[0].u_switch.req & ~dut.g_sw[0].u_switch.grant)) contention++;
    if (|(dut.g_sw[1].u_switch.req & ~dut.g_sw[1].u_switch.grant)) contention++;
    for (int v = 0; v < 8; v++) begin
      if (dut.g_sw[0].u_switch.out_full[v] && vc_state[0][v] == VC_BUSY) vc_full_stall++;
      if (dut.g_sw[1].u_switch.out_full[v] && vc_state[1][v] == VC_BUSY) vc_full_stall++;
    end
    if (dut.g_sw[0].u_switch.out_push != 0) per_switch[0]++;
    if (dut.g_sw[1].u_switch.out_push != 0) per_switch[1]++;
  end
  always @(posedge clk_s) if (noc_rst_n)
    for (int s = 0; s < NS; s++) for (int k = 0; k < NW; k++) if (src_valid[s][k] && !src_ready[s][k]) src_stall++;
  always @(posedge clk_p) if (noc_rst_n)
    for (int m = 0; m < NP; m++) if (pm_valid[m] && !pm_ready[m]) pm_stall++;

  // ---------------- stimulus ----------------
  task automatic send(input int s, input int k, input logic [1:0] p);
    @(negedge clk_s);
    src_valid[s][k] = 1; src_id[s][k] = 2'(s); src_p[s][k] = p; src_il[s][k] = 4'($urandom_range(0, 9));
    src_data[s][k] = DW'({$urandom, $urandom});
    @(posedge clk_s); while (!src_ready[s][k]) @(posedge clk_s);
    @(negedge clk_s); src_valid[s][k] = 0;
  endtask

  int lat_start, lat_end;
  initial begin
    foreach (src_valid[s, k]) begin src_valid[s][k] = 0; src_id[s][k] = '0; src_p[s][k] = '0; src_il[s][k] = '0; src_data[s][k] = '0; end
    foreach (pm_ready[m]) pm_ready[m] = 1;
    foreach (per_type[t]) per_type[t] = 0;
    foreach (st_seen[t]) st_seen[t] = 0;
    per_switch[0] = 0; per_switch[1] = 0;
    #33 noc_rst_n = 1;
    // 1. latency on an idle network: one result packet from source 3, adapter 1
    send(3, 1, 2'd2);
    @(posedge noc_clk); while (!dut.g_src[3].g_na[1].u_fifo_in.wr_en) @(posedge noc_clk);
    lat_start = 0;
    while (!dut.g_sw[1].u_switch.out_push[4] && lat_start < 20) begin @(posedge noc_clk); lat_start++; end
    check(lat_start == 4, $sformatf("route latency %0d NoC cycles, expected 4", lat_start));
    // 2. heavy random traffic on all eight adapters, processing nodes stalling
    fork
      for (int s = 0; s < NS; s++) for (int k = 0; k < NW; k++) begin
        automatic int ss = s, kk = k;
        fork
          for (int n = 0; n < 60; n++) send(ss, kk, (n < 20) ? 2'd0 : 2'($urandom_range(0, 3)));
        join_none
      end
      repeat (4000) begin
        @(negedge clk_p);
        foreach (pm_ready[m]) pm_ready[m] = ($urandom_range(0, 3) != 0);
      end
    join
    wait fork;
    foreach (pm_ready[m]) pm_ready[m] = 1;
    repeat (3000) @(posedge clk_p);
    check(received == sent, $sformatf("received %0d of %0d packets", received, sent));
    for (int m = 0; m < NP; m++) check(expected[m].size() == 0, $sformatf("PN %0d still waits for %0d packets", m, expected[m].size()));
    for (int t = 0; t < 4; t++) check(per_type[t] > 0, $sformatf("no packet of type %0d", t));
    for (int k = 0; k < NW; k++) check(per_switch[k] > 0, $sformatf("switch %0d never used", k));
    for (int t = 0; t < 4; t++) check(st_seen[t] > 0, $sformatf("VC state %0d never seen", t));
    check(contention > 0, "no arbitration contention");
    check(vc_full_stall > 0, "no full output VC");
    check(src_stall > 0, "no source back-pressure");
    check(pm_stall > 0, "no processing-node stall");
    $display("finished at %0t", $time);
    $display("packets %0d; per type %0d %0d %0d %0d; contention %0d; full-VC %0d; source stalls %0d; PN stalls %0d",
             received, per_type[0], per_type[1], per_type[2], per_type[3], contention, vc_full_stall, src_stall, pm_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
