// tb_ccn: the CCN with a simple grant model in place of the AU (grant every
// request, VC = 2*destination + input parity) and input FIFOs modelled by
// queues. Packets of all types enter the four inputs; the test checks that
// every packet reaches the VC it was granted, whole, in order, with out_tail
// on its last flit only, and that a VC that may not advance stalls its input.
module tb_ccn;
  import noc_pkg::*;
  localparam int NI = 4, NV = 8;
  logic clk = 0, rst_n = 0;
  logic [NI-1:0] in_empty, in_pop, req, grant;
  logic [7:0]    in_flit [NI];
  logic [1:0]    p_enc [NI];
  logic [2:0]    grant_vc [NI];
  logic [NV-1:0] can, push, tail;
  logic [7:0]    out_flit [NV];
  int checks = 0, failures = 0, stalls = 0;
  logic [7:0] inq [NI][$];
  logic [7:0] expq [NV][$];
  always #5 clk = ~clk;
  ccn #(.N_IN(NI), .N_PM(4), .VC_PER_PM(2), .FLIT_W(8)) dut (.clk, .rst_n, .in_empty, .in_flit, .in_pop, .req, .p_enc,
    .grant, .grant_vc, .vc_can_advance(can), .out_push(push), .out_tail(tail), .out_flit);
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // AU stand-in: input i may use VC 2*p + (i%2); one packet at a time per input
  // (inputs 0/2 and 1/3 never target the same VC at the same time because
  // each input only ever sends to p = i).
  always_comb begin
    for (int i = 0; i < NI; i++) begin
      in_empty[i] = (inq[i].size() == 0);
      in_flit[i]  = in_empty[i] ? 8'h00 : inq[i][0];
      grant[i]    = req[i];
      grant_vc[i] = 3'(2 * int'(p_enc[i]) + (i % 2));
    end
  end

  int pkts_done = 0;
  int flit_cnt [NV];
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NI; i++) if (in_pop[i]) void'(inq[i].pop_front());
    for (int v = 0; v < NV; v++) if (push[v]) begin
      checks++;
      if (!can[v]) begin failures++; $display("FAIL push without permission"); end
      if (expq[v].size() == 0 || out_flit[v] != expq[v][0]) begin failures++; $display("FAIL VC %0d flit %h", v, out_flit[v]); end
      else void'(expq[v].pop_front());
      flit_cnt[v]++;
      checks++;
      if (tail[v] != (out_flit[v] == 8'hFF && (flit_cnt[v] == 3 || flit_cnt[v] == 8 || flit_cnt[v] == 9))) begin
        // tail position: 3rd flit (result), 8th (48-bit data), 9th (56-bit data)
        failures++; $display("FAIL tail flag on VC %0d flit %0d", v, flit_cnt[v]);
      end
      if (tail[v]) begin flit_cnt[v] = 0; pkts_done++; end
    end
    for (int v = 0; v < NV; v++) if (!can[v]) stalls++;
  end

  initial begin
    static int sent = 0;
    foreach (flit_cnt[v]) flit_cnt[v] = 0;
    can = '1;
    #17 rst_n = 1;
    // each input i sends to PN i: packets of random types
    for (int n = 0; n < 10; n++)
      for (int i = 0; i < NI; i++) begin
        logic [1:0] id; int nd;
        id = 2'($urandom);
        nd = (id == 2'b00) ? 7 : (id == 2'b11) ? 1 : 6;
        inq[i].push_back({id, 2'(i), 4'h5});
        expq[2*i + (i%2)].push_back({id, 2'(i), 4'h5});
        for (int d = 0; d < nd; d++) begin
          logic [7:0] b; b = 8'($urandom_range(0, 8'h99));
          inq[i].push_back(b); expq[2*i + (i%2)].push_back(b);
        end
        inq[i].push_back(8'hFF); expq[2*i + (i%2)].push_back(8'hFF);
        sent++;
      end
    repeat (400) begin @(negedge clk); can = NV'($urandom) | NV'($urandom); end
    can = '1;
    repeat (50) @(negedge clk);
    checks++;
    if (pkts_done != sent) begin failures++; $display("FAIL %0d of %0d packets done", pkts_done, sent); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
