// image_analysis_top: the communication architecture of the image-analysis
// system: two networks, one for data and one for commands and results.
//
// Data from the storage modules travel to the processing nodes over the
// two-switch TDM fat-tree NoC (tdm_noc_top): typed packets, cut into 8-bit
// flits by network adapters, routed through two parallel main switches with
// virtual-channel FIFOs. Commands from the control module, and the few result
// words going back to it, use a ring (command_ring) that passes every module:
// the control module keeps four packets of four 8-bit flits circulating;
// command packets are taken by the module they address, and empty packets
// carry results back. Every module has its own clock (GALS); both networks
// cross clock domains on their own (bi-synchronous FIFOs in the data NoC,
// four-phase handshakes with two-flip-flop synchronisers on the ring).
//
// The modules themselves (storage, processing, acquisition, control) are not
// part of this RTL: their ports are brought out. Ring stations, in ring
// order after the control module: storage modules 0..N_SRC-1, processing
// modules 0..N_PM-1, then the acquisition module; station i has ring
// address i+1 and runs on that module's clock. The station indices of the
// node_* ports follow the same order.
module image_analysis_top
  import noc_pkg::*;
#(
  parameter int N_SRC     = 4,
  parameter int N_SW      = 2,
  parameter int N_PM      = 4,
  parameter int VC_PER_PM = 2,
  parameter int FLIT_W    = 8,
  parameter int DEPTH     = 32,
  parameter int DATA_W    = 56,
  parameter int N_PKTS    = 4,
  localparam int N_NODES  = N_SRC + N_PM + 1
) (
  input  logic              ctrl_clk,
  input  logic              ctrl_rst_n,
  input  logic              acq_clk,
  input  logic              acq_rst_n,
  input  logic              src_clk   [N_SRC],
  input  logic              src_rst_n [N_SRC],
  input  logic              noc_clk,
  input  logic              noc_rst_n,
  input  logic              pm_clk    [N_PM],
  input  logic              pm_rst_n  [N_PM],

  // data NoC: storage-module side (one port per network adapter)
  input  logic              src_valid      [N_SRC][N_SW],
  output logic              src_ready      [N_SRC][N_SW],
  input  logic [1:0]        src_id         [N_SRC][N_SW],
  input  logic [1:0]        src_p          [N_SRC][N_SW],
  input  logic [3:0]        src_int_length [N_SRC][N_SW],
  input  logic [DATA_W-1:0] src_data       [N_SRC][N_SW],
  // data NoC: processing-module side
  output logic              pm_valid [N_PM],
  input  logic              pm_ready [N_PM],
  output logic [FLIT_W-1:0] pm_flit  [N_PM],
  output logic              pm_sop   [N_PM],
  output logic              pm_eop   [N_PM],
  output vc_state_t         vc_state [N_SW][N_PM*VC_PER_PM],

  // ring: control-module side
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  logic [5:0]                cmd_dest,
  input  logic [RING_PAYLOAD_W-1:0] cmd_data,
  output logic                      res_valid,
  output logic [5:0]                res_src,
  output logic [RING_PAYLOAD_W-1:0] res_data,
  // ring: module side, per station
  output logic                      node_cmd_valid [N_NODES],
  output logic [RING_PAYLOAD_W-1:0] node_cmd_data  [N_NODES],
  input  logic                      node_res_valid [N_NODES],
  input  logic [RING_PAYLOAD_W-1:0] node_res_data  [N_NODES],
  output logic                      node_res_taken [N_NODES]
);
  tdm_noc_top #(
    .N_SRC(N_SRC), .N_SW(N_SW), .N_PM(N_PM), .VC_PER_PM(VC_PER_PM),
    .FLIT_W(FLIT_W), .DEPTH(DEPTH), .DATA_W(DATA_W)
  ) u_data (
    .src_clk, .src_rst_n, .noc_clk, .noc_rst_n, .pm_clk, .pm_rst_n,
    .src_valid, .src_ready, .src_id, .src_p, .src_int_length, .src_data,
    .pm_valid, .pm_ready, .pm_flit, .pm_sop, .pm_eop, .vc_state
  );

  logic node_clk   [N_NODES];
  logic node_rst_n [N_NODES];

  for (genvar s = 0; s < N_SRC; s++) begin : g_src_station
    assign node_clk[s]   = src_clk[s];
    assign node_rst_n[s] = src_rst_n[s];
  end
  for (genvar m = 0; m < N_PM; m++) begin : g_pm_station
    assign node_clk[N_SRC + m]   = pm_clk[m];
    assign node_rst_n[N_SRC + m] = pm_rst_n[m];
  end
  assign node_clk[N_NODES-1]   = acq_clk;
  assign node_rst_n[N_NODES-1] = acq_rst_n;

  command_ring #(.N_NODES(N_NODES), .N_PKTS(N_PKTS)) u_ring (
    .ctrl_clk, .ctrl_rst_n, .node_clk, .node_rst_n,
    .cmd_valid, .cmd_ready, .cmd_dest, .cmd_data, .res_valid, .res_src, .res_data,
    .node_cmd_valid, .node_cmd_data, .node_res_valid, .node_res_data, .node_res_taken
  );
endmodule
