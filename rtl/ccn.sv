// ccn: Central Coordination Node of a main switch.
//
// For each input FIFO it waits for a header flit at the head, presents the
// header's destination (P_enc) to the arbitration unit, and when granted
// records the input-to-VC mapping together with the packet's flit count (from
// the header's type id). While mapped, the input's head flit crosses the
// crossbar into the mapped VC in every cycle in which the input is not empty
// and the AU lets the VC advance; the mapping is released after the last flit.
// The paper gives the CCN's role (maps new messages to target channels using
// the AU's routing information) and the crossbar; counting flits instead of
// matching the FF tail, and the registered grant (a header waits one cycle for
// its route, then one flit crosses per cycle), are this design's choices.
// Several inputs cross in the same cycle when they map to different VCs.
module ccn
  import noc_pkg::*;
#(
  parameter int N_IN      = 4,
  parameter int N_PM      = 4,
  parameter int VC_PER_PM = 2,
  parameter int FLIT_W    = 8,
  localparam int N_VC     = N_PM * VC_PER_PM,
  localparam int VCW      = (N_VC > 1) ? $clog2(N_VC) : 1,
  localparam int PW       = (N_PM > 1) ? $clog2(N_PM) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_IN-1:0]   in_empty,
  input  logic [FLIT_W-1:0] in_flit [N_IN],
  output logic [N_IN-1:0]   in_pop,
  output logic [N_IN-1:0]   req,
  output logic [PW-1:0]     p_enc [N_IN],
  input  logic [N_IN-1:0]   grant,
  input  logic [VCW-1:0]    grant_vc [N_IN],
  input  logic [N_VC-1:0]   vc_can_advance,
  output logic [N_VC-1:0]   out_push,
  output logic [N_VC-1:0]   out_tail,
  output logic [FLIT_W-1:0] out_flit [N_VC]
);
  logic [N_IN-1:0] active;
  logic [VCW-1:0]  vc_sel [N_IN];
  logic [7:0]      remaining [N_IN];
  logic [7:0]      nb_head [N_IN];

  header_t hdr [N_IN];

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      hdr[i]     = header_t'(in_flit[i][FLIT_W-1 -: HDR_W]);
      nb_head[i] = 8'(nb_flits(hdr[i].id, FLIT_W));
      req[i]     = !active[i] && !in_empty[i];
      p_enc[i]   = PW'(hdr[i].p);
      in_pop[i] = active[i] && !in_empty[i] && vc_can_advance[vc_sel[i]];
    end
    out_push = '0;
    out_tail = '0;
    for (int v = 0; v < N_VC; v++) out_flit[v] = '0;
    for (int i = 0; i < N_IN; i++) begin
      if (in_pop[i]) begin
        out_push[vc_sel[i]] = 1'b1;
        out_tail[vc_sel[i]] = (remaining[i] == 8'd1);
        out_flit[vc_sel[i]] = in_flit[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0;
      for (int i = 0; i < N_IN; i++) begin
        vc_sel[i]    <= '0;
        remaining[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N_IN; i++) begin
        if (!active[i]) begin
          if (grant[i]) begin
            active[i]    <= 1'b1;
            vc_sel[i]    <= grant_vc[i];
            remaining[i] <= nb_head[i];
          end
        end else if (in_pop[i]) begin
          remaining[i] <= remaining[i] - 8'd1;
          if (remaining[i] == 8'd1) active[i] <= 1'b0;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (grant & ~req) == '0)
    else $error("ccn: grant without a request");

endmodule
