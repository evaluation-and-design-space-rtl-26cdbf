// main_switch: one main switch of the data NoC.
//
// A CCN and an arbitration unit (AU) together form an N_IN-input crossbar
// onto N_PM*VC_PER_PM output virtual channels, VC_PER_PM per destination
// processing node (VC index = PN * VC_PER_PM + channel). Inputs are the heads
// of the input FIFOs; outputs write into the output VC FIFOs, whose full and
// write-side-empty flags come back to the AU. The paper's switch drawing also
// places the network adapter and the output FIFOs in the switch; here both sit
// outside it, as in the paper's drawing of the two-switch version. Timing: a
// header at an input head is granted in the cycle it appears (if a VC of its
// destination is idle), crosses in the next cycle, and every following flit
// crosses one per cycle while its FIFO is not empty and the VC has room.
module main_switch
  import noc_pkg::*;
#(
  parameter int N_IN      = 4,
  parameter int N_PM      = 4,
  parameter int VC_PER_PM = 2,
  parameter int FLIT_W    = 8,
  localparam int N_VC     = N_PM * VC_PER_PM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_IN-1:0]   in_empty,
  input  logic [FLIT_W-1:0] in_flit [N_IN],
  output logic [N_IN-1:0]   in_pop,
  input  logic [N_VC-1:0]   out_full,
  input  logic [N_VC-1:0]   out_drained,
  output logic [N_VC-1:0]   out_push,
  output logic [FLIT_W-1:0] out_flit [N_VC],
  output vc_state_t         vc_state [N_VC]
);
  localparam int VCW = (N_VC > 1) ? $clog2(N_VC) : 1;
  localparam int PW  = (N_PM > 1) ? $clog2(N_PM) : 1;

  logic [N_IN-1:0] req, grant;
  logic [PW-1:0]   p_enc [N_IN];
  logic [VCW-1:0]  grant_vc [N_IN];
  logic [N_VC-1:0] vc_can_advance, out_tail;

  ccn #(.N_IN(N_IN), .N_PM(N_PM), .VC_PER_PM(VC_PER_PM), .FLIT_W(FLIT_W)) u_ccn (
    .clk, .rst_n, .in_empty, .in_flit, .in_pop, .req, .p_enc, .grant, .grant_vc,
    .vc_can_advance, .out_push, .out_tail, .out_flit
  );

  arbitration_unit #(.N_IN(N_IN), .N_PM(N_PM), .VC_PER_PM(VC_PER_PM)) u_au (
    .clk, .rst_n, .req, .p_enc, .vc_full(out_full), .vc_drained(out_drained),
    .vc_push(out_push), .vc_tail(out_tail), .grant, .grant_vc, .vc_can_advance, .vc_state
  );
endmodule
