// tb_image_analysis_top: end-to-end test of the whole communication
// architecture at its default size: the two-switch data NoC (4 storage
// modules x 2 adapters, 2 main switches, 16 output VCs of 32 flits, 4
// processing nodes) and the command/result ring (control module + 9 module
// stations). Clocks: storage modules 100 MHz, NoC 250 MHz, processing nodes
// 50 MHz, control 150 MHz, acquisition 76.9 MHz (the module frequencies are
// those the paper lists for its nodes; the NoC clock is this test's choice).
//
// Data: storage module s sends words of type id s (coefficient, original,
// compared, result) on both adapters to random processing nodes, which take
// flits with a random ready; every packet delivered is compared with the
// packets built here from the words sent to that node, and all must arrive.
// Ring: while the data flow, the control module sends commands to every
// station; each station answers each command with a result word, which must
// come back to the control module with the station's address.
// The test counts, and fails if any never happened: packets of each type,
// traffic through each main switch, each VC state (idle, ready, busy,
// empty), arbitration contention, a full output VC holding the crossbar
// back, a storage module held back by a full adapter, a processing node
// stalling its output switch, a command taken by its station and an empty
// ring packet filled with a result. It also checks the data NoC's route
// latency on an idle network: a header written into an input FIFO is
// written into its output VC 4 NoC cycles later (input-FIFO synchroniser 2,
// route grant 1, crossing 1).
module tb_image_analysis_top;
  import noc_pkg::*;
  localparam int NS = 4, NW = 2, NP = 4, DW = 56;

  logic src_clk [NS], src_rst_n [NS], pm_clk [NP], pm_rst_n [NP];
  logic noc_clk = 0, noc_rst_n = 0;
  logic        src_valid [NS][NW], src_ready [NS][NW];
  logic [1:0]  src_id [NS][NW], src_p [NS][NW];
  logic [3:0]  src_il [NS][NW];
  logic [DW-1:0] src_data [NS][NW];
  logic        pm_valid [NP], pm_ready [NP], pm_sop [NP], pm_eop [NP];
  logic [7:0]  pm_flit [NP];
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

  localparam int NN = NS + NP + 1;
  logic ctrl_clk = 0, acq_clk = 0;
  always #3.333 ctrl_clk = ~ctrl_clk;
  always #6.5 acq_clk = ~acq_clk;
  logic cmd_valid = 0, cmd_ready, res_valid;
  logic [5:0] cmd_dest = '0, res_src;
  logic [23:0] cmd_data = '0, res_data;
  logic n_cmd_valid [NN], n_res_valid [NN], n_res_taken [NN];
  logic [23:0] n_cmd_data [NN], n_res_data [NN];
  logic st_clk [NN];

  image_analysis_top dut (
    .ctrl_clk, .ctrl_rst_n(noc_rst_n), .acq_clk, .acq_rst_n(noc_rst_n),
    .src_clk, .src_rst_n, .noc_clk, .noc_rst_n, .pm_clk, .pm_rst_n,
    .src_valid, .src_ready, .src_id, .src_p, .src_int_length(src_il), .src_data,
    .pm_valid, .pm_ready, .pm_flit, .pm_sop, .pm_eop, .vc_state,
    .cmd_valid, .cmd_ready, .cmd_dest, .cmd_data, .res_valid, .res_src, .res_data,
    .node_cmd_valid(n_cmd_valid), .node_cmd_data(n_cmd_data), .node_res_valid(n_res_valid),
    .node_res_data(n_res_data), .node_res_taken(n_res_taken));

  // ---------------- ring: module models and scoreboard ----------------
  logic [23:0] exp_cmd [NN][$];
  logic [23:0] pend [NN][$];
  logic [29:0] exp_res [$];
  int cmds_got = 0, res_got = 0, fills = 0;
  for (genvar i = 0; i < NN; i++) begin : g_station
    if (i < NS) begin : g_s assign st_clk[i] = clk_s; end
    else if (i < NS + NP) begin : g_p assign st_clk[i] = clk_p; end
    else begin : g_a assign st_clk[i] = acq_clk; end
    assign n_res_valid[i] = (pend[i].size() != 0);
    assign n_res_data[i]  = (pend[i].size() != 0) ? pend[i][0] : 24'h0;
    always @(posedge st_clk[i]) if (noc_rst_n) begin
      if (n_res_taken[i]) begin void'(pend[i].pop_front()); fills++; end
      if (n_cmd_valid[i]) begin
        checks++;
        if (exp_cmd[i].size() == 0 || n_cmd_data[i] != exp_cmd[i][0]) begin failures++; $display("FAIL station %0d command %h", i, n_cmd_data[i]); end
        if (exp_cmd[i].size() != 0) void'(exp_cmd[i].pop_front());
        pend[i].push_back({8'(i), n_cmd_data[i][15:0]});
        exp_res.push_back({6'(i + 1), 8'(i), n_cmd_data[i][15:0]});
        cmds_got++;
      end
    end
  end
  always @(posedge ctrl_clk) if (noc_rst_n && res_valid) begin
    int hit; hit = -1;
    checks++;
    foreach (exp_res[k]) if (hit < 0 && exp_res[k] == {res_src, res_data}) hit = k;
    if (hit < 0) begin failures++; $display("FAIL unexpected result %h from %0d", res_data, res_src); end
    else exp_res.delete(hit);
    res_got++;
  end

  task automatic check(input logic c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin repeat (250000) @(posedge noc_clk); failures++; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- scoreboard ----------------
  typedef logic [7:0] flits_t[$];
  flits_t expected [NP][$];
  logic [7:0] cur [NP][$];
  int sent = 0, received = 0, per_type [4], per_switch [NW];

  function automatic flits_t make_packet(logic [1:0] id, logic [1:0] p, logic [3:0] il, logic [DW-1:0] d);
    flits_t f; logic [71:0] pk; int n;
    case (id)
      2'b00: begin pk = {id, p, il, d[55:0], 8'hFF}; n = 9; end
      2'b01, 2'b10: begin pk = {id, p, il, d[47:0], 8'hFF, 8'h00}; n = 8; end
      default: begin pk = {id, p, il, d[7:0], 8'hFF, 48'h0}; n = 3; end
    endcase
    for (int k = 0; k < n; k++) f.push_back(pk[71 - 8*k -: 8]);
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
        else begin expected[m].delete(hit); per_type[cur[m][0][7:6]]++; end
        checks++;
        if (int'(cur[m][0][5:4]) != m) begin failures++; $display("FAIL packet for PN %0d delivered to %0d", cur[m][0][5:4], m); end
        received++;
        cur[m].delete();
      end
    end

  // ---------------- mechanism counters ----------------
  int st_seen [4], contention = 0, vc_full_stall = 0, src_stall = 0, pm_stall = 0;
  always @(posedge noc_clk) if (noc_rst_n) begin
    for (int k = 0; k < NW; k++) for (int v = 0; v < 8; v++) st_seen[vc_state[k][v]]++;
    if (|(dut.u_data.g_sw[0].u_switch.req & ~dut.u_data.g_sw[0].u_switch.grant)) contention++;
    if (|(dut.u_data.g_sw[1].u_switch.req & ~dut.u_data.g_sw[1].u_switch.grant)) contention++;
    for (int v = 0; v < 8; v++) begin
      if (dut.u_data.g_sw[0].u_switch.out_full[v] && vc_state[0][v] == VC_BUSY) vc_full_stall++;
      if (dut.u_data.g_sw[1].u_switch.out_full[v] && vc_state[1][v] == VC_BUSY) vc_full_stall++;
    end
    if (dut.u_data.g_sw[0].u_switch.out_push != 0) per_switch[0]++;
    if (dut.u_data.g_sw[1].u_switch.out_push != 0) per_switch[1]++;
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
    @(posedge noc_clk); while (!dut.u_data.g_src[3].g_na[1].u_fifo_in.wr_en) @(posedge noc_clk);
    lat_start = 0;
    while (!dut.u_data.g_sw[1].u_switch.out_push[4] && lat_start < 20) begin @(posedge noc_clk); lat_start++; end
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
      for (int k = 0; k < 3 * NN; k++) begin
        @(negedge ctrl_clk);
        cmd_valid = 1; cmd_dest = 6'((k % NN) + 1); cmd_data = 24'($urandom);
        exp_cmd[k % NN].push_back(cmd_data);
        @(posedge ctrl_clk); while (!cmd_ready) @(posedge ctrl_clk);
        @(negedge ctrl_clk); cmd_valid = 0;
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
    check(cmds_got == 3 * NN, $sformatf("%0d of %0d commands delivered", cmds_got, 3 * NN));
    check(res_got == 3 * NN && exp_res.size() == 0, $sformatf("%0d of %0d results returned", res_got, 3 * NN));
    check(fills == 3 * NN, "empty ring packets filled with results");
    $display("ring: commands %0d, results %0d", cmds_got, res_got);
    $display("finished at %0t", $time);
    $display("packets %0d; per type %0d %0d %0d %0d; contention %0d; full-VC %0d; source stalls %0d; PN stalls %0d",
             received, per_type[0], per_type[1], per_type[2], per_type[3], contention, vc_full_stall, src_stall, pm_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
