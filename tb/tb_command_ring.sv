// tb_command_ring: the whole ring (control station + nine module stations),
// each station on its own clock (control 6.67 ns, modules 8 to 16 ns). The
// control module sends 45 commands, five to every station in random order;
// each station answers every command it receives with a result {its index,
// command low 16 bits}. Checks: every command reaches only its addressed
// station, once, unchanged and in order; every result reaches the control
// module once, with the right source address and payload.
module tb_command_ring;
  import noc_pkg::*;
  localparam int NN = 9;
  logic cclk = 0, crst_n = 0;
  logic nclk [NN], nrst_n [NN];
  logic cmd_valid = 0, cmd_ready, res_valid;
  logic [5:0] cmd_dest = '0, res_src;
  logic [23:0] cmd_data = '0, res_data;
  logic n_cmd_valid [NN], n_res_valid [NN], n_res_taken [NN];
  logic [23:0] n_cmd_data [NN], n_res_data [NN];
  int checks = 0, failures = 0, cmds_got = 0, res_got = 0;
  logic [23:0] exp_cmd [NN][$];
  logic [23:0] pend [NN][$];
  logic [29:0] exp_res [$];
  always #3.333 cclk = ~cclk;
  for (genvar i = 0; i < NN; i++) begin : g_clk
    initial nclk[i] = 0;
    always #(4 + i) nclk[i] = ~nclk[i];
    assign nrst_n[i] = crst_n;
    // module model: answer each command with a result
    assign n_res_valid[i] = (pend[i].size() != 0);
    assign n_res_data[i]  = (pend[i].size() != 0) ? pend[i][0] : 24'h0;
    always @(posedge nclk[i]) if (crst_n) begin
      if (n_res_taken[i]) void'(pend[i].pop_front());
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
  command_ring #(.N_NODES(NN)) dut (.ctrl_clk(cclk), .ctrl_rst_n(crst_n), .node_clk(nclk), .node_rst_n(nrst_n),
    .cmd_valid, .cmd_ready, .cmd_dest, .cmd_data, .res_valid, .res_src, .res_data,
    .node_cmd_valid(n_cmd_valid), .node_cmd_data(n_cmd_data), .node_res_valid(n_res_valid),
    .node_res_data(n_res_data), .node_res_taken(n_res_taken));
  initial begin #5000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge cclk) if (crst_n && res_valid) begin
    int hit; hit = -1;
    checks++;
    foreach (exp_res[k]) if (hit < 0 && exp_res[k] == {res_src, res_data}) hit = k;
    if (hit < 0) begin failures++; $display("FAIL unexpected result %h from %0d", res_data, res_src); end
    else exp_res.delete(hit);
    res_got++;
  end

  initial begin
    int order [45];
    for (int k = 0; k < 45; k++) order[k] = k % NN;
    order.shuffle();
    #40 crst_n = 1;
    foreach (order[k]) begin
      @(negedge cclk);
      cmd_valid = 1; cmd_dest = 6'(order[k] + 1); cmd_data = 24'($urandom);
      exp_cmd[order[k]].push_back(cmd_data);
      @(posedge cclk); while (!cmd_ready) @(posedge cclk);
      @(negedge cclk); cmd_valid = 0;
    end
    while ((cmds_got < 45 || res_got < 45) && $time < 4900000) @(posedge cclk);
    checks++; if (cmds_got != 45) begin failures++; $display("FAIL %0d of 45 commands delivered", cmds_got); end
    checks++; if (res_got != 45 || exp_res.size() != 0) begin failures++; $display("FAIL %0d of 45 results", res_got); end
    $display("done at %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
