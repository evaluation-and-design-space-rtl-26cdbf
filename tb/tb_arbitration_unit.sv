// tb_arbitration_unit: drives requests and VC events into the AU and checks,
// against a model written here, the grants, the VC chosen (lowest IDLE VC of
// the requested PN), round-robin fairness between inputs asking for the same
// PN, the state sequence IDLE->READY->BUSY->EMPTY->IDLE, and vc_can_advance.
module tb_arbitration_unit;
  import noc_pkg::*;
  localparam int NI = 4, NP = 4, VP = 2, NV = 8;
  logic clk = 0, rst_n = 0;
  logic [NI-1:0] req = '0, grant;
  logic [1:0]    p_enc [NI];
  logic [NV-1:0] vc_full = '0, vc_drained = '1, vc_push = '0, vc_tail = '0, can;
  logic [2:0]    grant_vc [NI];
  vc_state_t     st [NV];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  arbitration_unit #(.N_IN(NI), .N_PM(NP), .VC_PER_PM(VP)) dut (.clk, .rst_n, .req, .p_enc, .vc_full, .vc_drained,
    .vc_push, .vc_tail, .grant, .grant_vc, .vc_can_advance(can), .vc_state(st));
  task automatic check(input logic c, input string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int winners[$];
    foreach (p_enc[i]) p_enc[i] = '0;
    #17 rst_n = 1;
    @(negedge clk);
    foreach (st[v]) check(st[v] == VC_IDLE, "idle after reset");
    // all four inputs ask for PN 2: one grant per cycle, VC 4 then VC 5, then none
    req = 4'b1111; foreach (p_enc[i]) p_enc[i] = 2'd2;
    #1;
    check(grant == 4'b0001 && grant_vc[0] == 3'd4, $sformatf("first grant %b vc %0d", grant, grant_vc[0]));
    @(negedge clk); req[0] = 0;
    check(st[4] == VC_READY, "VC4 ready after grant");
    check(can[4] && !can[5], "only granted VC may advance");
    check(grant == 4'b0010 && grant_vc[1] == 3'd5, $sformatf("second grant %b", grant));
    @(negedge clk); req[1] = 0;
    check(grant == 4'b0000, "no grant when both VCs of the PN are taken");
    // VC4: header push, then tail push, then drain
    vc_push[4] = 1; @(negedge clk);
    check(st[4] == VC_BUSY, "busy after header");
    vc_full[4] = 1; #1 check(!can[4], "full VC may not advance"); vc_full[4] = 0;
    vc_push[4] = 1; vc_tail[4] = 1; vc_drained[4] = 0; @(negedge clk);
    vc_push[4] = 0; vc_tail[4] = 0;
    check(st[4] == VC_EMPTY, "empty state after tail");
    // round robin: inputs 2 and 3 remain; the one after the last winner (1) is 2,
    // and the draining VC 4 may take the next packet
    #1 check(grant == 4'b0100 && grant_vc[2] == 3'd4, $sformatf("rr grant to EMPTY VC %b", grant));
    req = '0; #1;
    @(negedge clk); check(st[4] == VC_EMPTY, "stays until drained");
    vc_drained[4] = 1; @(negedge clk);
    check(st[4] == VC_IDLE, "idle after drain");
    req = 4'b1100; #1;
    check(grant == 4'b0100 && grant_vc[2] == 3'd4, $sformatf("rr grant %b", grant));
    // an IDLE VC is preferred to an EMPTY one
    @(negedge clk); req = '0;
    vc_push[4] = 1; vc_tail[4] = 1; vc_drained[4] = 0; @(negedge clk); vc_push[4] = 0; vc_tail[4] = 0;
    vc_push[5] = 1; vc_tail[5] = 1; vc_drained[5] = 0; @(negedge clk); vc_push[5] = 0; vc_tail[5] = 0;
    vc_drained[5] = 1; @(negedge clk);
    check(st[4] == VC_EMPTY && st[5] == VC_IDLE, "VC4 draining, VC5 idle");
    req = 4'b1000; #1;
    check(grant == 4'b1000 && grant_vc[3] == 3'd5, "idle VC preferred");
    @(negedge clk); req = '0; vc_drained = '1;
    vc_push[5] = 1; vc_tail[5] = 1; @(negedge clk); vc_push = '0; vc_tail = '0;
    repeat (2) @(negedge clk);
    // fairness over many rounds on PN 0 with all inputs requesting
    req = '0; @(negedge clk);
    foreach (p_enc[i]) p_enc[i] = 2'd0;
    for (int r = 0; r < 8; r++) begin
      req = 4'b1111;
      #1;
      for (int i = 0; i < NI; i++) if (grant[i]) winners.push_back(i);
      check($countones(grant) == 1, "one grant per PN per cycle");
      @(negedge clk); req = '0;
      // release: one-flit packet then drain
      for (int v = 0; v < 2; v++) if (st[v] == VC_READY) begin vc_push[v] = 1; vc_tail[v] = 1; end
      @(negedge clk); vc_push = '0; vc_tail = '0;
      @(negedge clk);
    end
    for (int r = 1; r < winners.size(); r++)
      check(winners[r] == (winners[r-1] + 1) % NI, $sformatf("round robin order %0d after %0d", winners[r], winners[r-1]));
    // independent PNs are granted in the same cycle
    p_enc[0] = 2'd1; p_enc[1] = 2'd3; req = 4'b0011; #1;
    check(grant == 4'b0011 && grant_vc[0] == 3'd2 && grant_vc[1] == 3'd6, "parallel grants to different PNs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
