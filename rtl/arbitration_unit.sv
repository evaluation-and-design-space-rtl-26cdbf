// arbitration_unit: the AU of a main switch.
//
// It keeps the state of each of the N_PM*VC_PER_PM output virtual channels and
// grants routes. The paper gives the four state names (idle, ready, busy,
// empty), says the AU is a round-robin arbiter that looks at the VC states of
// the destination given by P_enc and reports back to the CCN, and that it
// decides each cycle which VC may advance. How the states are used is this
// design's choice:
//   IDLE  -> READY  the VC is granted to an input (header not yet written)
//   READY -> BUSY   a flit is written (straight to EMPTY if it is the last)
//   BUSY  -> EMPTY  the packet's last flit is written
//   EMPTY -> IDLE   the VC FIFO has drained (write-side empty flag)
//   EMPTY -> READY  the VC is granted again while its FIFO still drains
// A VC carries one packet at a time, but packets queue in its FIFO: an EMPTY
// VC (no packet in flight, FIFO not yet drained) may take the next packet, so
// the FIFO depth is usable. Per destination PN there is one round-robin
// arbiter over the inputs whose header targets it; each cycle it grants at
// most one of them, to the lowest IDLE VC of that PN or, if none, the lowest
// EMPTY one, and then gives priority to the input after the winner. grant/grant_vc are combinational; the CCN registers them.
// A VC may advance (vc_can_advance) when it is READY or BUSY and its FIFO is
// not full.
module arbitration_unit
  import noc_pkg::*;
#(
  parameter int N_IN      = 4,
  parameter int N_PM      = 4,
  parameter int VC_PER_PM = 2,
  localparam int N_VC     = N_PM * VC_PER_PM,
  localparam int VCW      = (N_VC > 1) ? $clog2(N_VC) : 1,
  localparam int INW      = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int PW       = (N_PM > 1) ? $clog2(N_PM) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] req,
  input  logic [PW-1:0]   p_enc [N_IN],
  input  logic [N_VC-1:0] vc_full,
  input  logic [N_VC-1:0] vc_drained,
  input  logic [N_VC-1:0] vc_push,
  input  logic [N_VC-1:0] vc_tail,
  output logic [N_IN-1:0] grant,
  output logic [VCW-1:0]  grant_vc [N_IN],
  output logic [N_VC-1:0] vc_can_advance,
  output vc_state_t       vc_state [N_VC]
);
  logic [INW-1:0]  rr_ptr [N_PM];
  logic [N_PM-1:0] pm_granted;
  logic [INW-1:0]  pm_winner [N_PM];
  logic [N_VC-1:0] vc_alloc;
  logic            found_vc, found_in;
  logic [VCW-1:0]  vc;
  logic [INW-1:0]  win;

  // Round-robin choice per destination PN and choice of a free VC.
  always_comb begin
    grant    = '0;
    vc_alloc = '0;
    for (int i = 0; i < N_IN; i++) grant_vc[i] = '0;
    for (int p = 0; p < N_PM; p++) begin
      found_vc = 1'b0;
      vc       = '0;
      // Prefer the lowest IDLE VC, else the lowest EMPTY (draining) one.
      for (int v = VC_PER_PM - 1; v >= 0; v--) begin
        if (vc_state[p*VC_PER_PM + v] == VC_EMPTY) begin
          found_vc = 1'b1;
          vc       = VCW'(p*VC_PER_PM + v);
        end
      end
      for (int v = VC_PER_PM - 1; v >= 0; v--) begin
        if (vc_state[p*VC_PER_PM + v] == VC_IDLE) begin
          found_vc = 1'b1;
          vc       = VCW'(p*VC_PER_PM + v);
        end
      end
      found_in = 1'b0;
      win      = '0;
      for (int k = N_IN - 1; k >= 0; k--) begin
        if (req[(int'(rr_ptr[p]) + k) % N_IN] && int'(p_enc[(int'(rr_ptr[p]) + k) % N_IN]) == p) begin
          found_in = 1'b1;
          win      = INW'((int'(rr_ptr[p]) + k) % N_IN);
        end
      end
      pm_granted[p] = found_vc && found_in;
      pm_winner[p]  = win;
      if (found_vc && found_in) begin
        grant[win]    = 1'b1;
        grant_vc[win] = vc;
        vc_alloc[vc]  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < N_PM; p++) rr_ptr[p] <= '0;
    end else begin
      for (int p = 0; p < N_PM; p++)
        if (pm_granted[p]) rr_ptr[p] <= INW'((int'(pm_winner[p]) + 1) % N_IN);
    end
  end

  // VC state machines.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < N_VC; v++) vc_state[v] <= VC_IDLE;
    end else begin
      for (int v = 0; v < N_VC; v++) begin
        case (vc_state[v])
          VC_IDLE:  if (vc_alloc[v]) vc_state[v] <= VC_READY;
          VC_READY: if (vc_push[v])  vc_state[v] <= vc_tail[v] ? VC_EMPTY : VC_BUSY;
          VC_BUSY:  if (vc_push[v] && vc_tail[v]) vc_state[v] <= VC_EMPTY;
          VC_EMPTY: if (vc_alloc[v])        vc_state[v] <= VC_READY;
                    else if (vc_drained[v]) vc_state[v] <= VC_IDLE;
          default:  vc_state[v] <= VC_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    for (int v = 0; v < N_VC; v++)
      vc_can_advance[v] = (vc_state[v] == VC_READY || vc_state[v] == VC_BUSY) && !vc_full[v];
  end

  // A flit may only be written into a VC that was allowed to advance.
  assert property (@(posedge clk) disable iff (!rst_n) (vc_push & ~vc_can_advance) == '0)
    else $error("arbitration_unit: push into a VC that may not advance");

endmodule
