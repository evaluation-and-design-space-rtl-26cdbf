// output_switch: the small switch in front of each processing node (PN).
//
// It gathers the N_VC virtual channels that lead to one PN (VC_PER_PM from
// each main switch) and forwards whole packets, one flit per cycle, to the
// PN. When no packet is in progress it picks, round robin from the VC after
// the last one served, a VC holding a flit, sends that header flit in the
// same cycle, and then stays on that VC for the packet's remaining flits
// (counted from the header's type id), so packets are never interleaved.
// pm_sop marks a header flit and pm_eop a packet's last flit; a flit is taken
// when pm_valid and pm_ready are both high. The paper draws and names these
// switches but does not describe them: their whole behaviour is this design's
// choice. Runs in the PN's clock domain.
module output_switch
  import noc_pkg::*;
#(
  parameter int N_VC   = 4,
  parameter int FLIT_W = 8,
  localparam int VCW   = (N_VC > 1) ? $clog2(N_VC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_VC-1:0]   vc_empty,
  input  logic [FLIT_W-1:0] vc_flit [N_VC],
  output logic [N_VC-1:0]   vc_pop,
  output logic              pm_valid,
  input  logic              pm_ready,
  output logic [FLIT_W-1:0] pm_flit,
  output logic              pm_sop,
  output logic              pm_eop
);
  logic           locked;
  logic [VCW-1:0] cur, ptr, pick, sel;
  logic           any;
  logic [7:0]     remaining, nb_new;

  header_t h;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = N_VC - 1; k >= 0; k--) begin
      if (!vc_empty[(int'(ptr) + k) % N_VC]) begin
        any  = 1'b1;
        pick = VCW'((int'(ptr) + k) % N_VC);
      end
    end
    sel      = locked ? cur : pick;
    pm_valid = locked ? !vc_empty[cur] : any;
    pm_flit  = vc_flit[sel];
    h        = header_t'(vc_flit[sel][FLIT_W-1 -: HDR_W]);
    nb_new   = 8'(nb_flits(h.id, FLIT_W));
    pm_sop   = !locked && any;
    pm_eop   = pm_valid && (locked ? (remaining == 8'd1) : (nb_new == 8'd1));
    vc_pop   = '0;
    if (pm_valid && pm_ready) vc_pop[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked    <= 1'b0;
      cur       <= '0;
      ptr       <= '0;
      remaining <= '0;
    end else if (pm_valid && pm_ready) begin
      if (!locked) begin
        cur       <= pick;
        ptr       <= VCW'((int'(pick) + 1) % N_VC);
        remaining <= nb_new - 8'd1;
        locked    <= (nb_new != 8'd1);
      end else begin
        remaining <= remaining - 8'd1;
        if (remaining == 8'd1) locked <= 1'b0;
      end
    end
  end
endmodule
