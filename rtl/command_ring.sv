// command_ring: the ring network for commands and results.
//
// The control module's station (ring_master) and N_NODES module stations
// (ring_node, addresses 1..N_NODES) are chained in a ring: master -> node 0
// -> node 1 -> ... -> node N_NODES-1 -> master. Every station runs on its own
// clock; each link is a bundled 8-bit flit with a four-phase req/ack
// handshake synchronised by two flip-flops at each end. The default of nine
// module stations matches the paper's application (4 storage, 4 processing, 1
// acquisition module). Station i's command output and result input are the
// ports indexed i. Commands reach their module within one ring round; results
// ride in the next empty packet to pass the module.
module command_ring
  import noc_pkg::*;
#(
  parameter int N_NODES     = 9,
  parameter int N_PKTS      = 4,
  parameter int SYNC_STAGES = 2
) (
  input  logic                      ctrl_clk,
  input  logic                      ctrl_rst_n,
  input  logic                      node_clk   [N_NODES],
  input  logic                      node_rst_n [N_NODES],
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  logic [5:0]                cmd_dest,
  input  logic [RING_PAYLOAD_W-1:0] cmd_data,
  output logic                      res_valid,
  output logic [5:0]                res_src,
  output logic [RING_PAYLOAD_W-1:0] res_data,
  output logic                      node_cmd_valid [N_NODES],
  output logic [RING_PAYLOAD_W-1:0] node_cmd_data  [N_NODES],
  input  logic                      node_res_valid [N_NODES],
  input  logic [RING_PAYLOAD_W-1:0] node_res_data  [N_NODES],
  output logic                      node_res_taken [N_NODES]
);
  // link i goes into station i (node i for i < N_NODES, master for i = N_NODES)
  logic       req  [N_NODES+1];
  logic       ack  [N_NODES+1];
  logic [7:0] data [N_NODES+1];
  logic [7:0] in_flight;

  ring_master #(.N_PKTS(N_PKTS), .SYNC_STAGES(SYNC_STAGES)) u_master (
    .clk(ctrl_clk), .rst_n(ctrl_rst_n),
    .req_o(req[0]), .data_o(data[0]), .ack_i(ack[0]),
    .req_i(req[N_NODES]), .data_i(data[N_NODES]), .ack_o(ack[N_NODES]),
    .cmd_valid, .cmd_ready, .cmd_dest, .cmd_data, .res_valid, .res_src, .res_data, .in_flight
  );

  for (genvar i = 0; i < N_NODES; i++) begin : g_node
    ring_node #(.MY_ADDR(6'(i + 1)), .SYNC_STAGES(SYNC_STAGES)) u_node (
      .clk(node_clk[i]), .rst_n(node_rst_n[i]),
      .req_i(req[i]), .data_i(data[i]), .ack_o(ack[i]),
      .req_o(req[i+1]), .data_o(data[i+1]), .ack_i(ack[i+1]),
      .cmd_valid(node_cmd_valid[i]), .cmd_data(node_cmd_data[i]),
      .res_valid(node_res_valid[i]), .res_data(node_res_data[i]), .res_taken(node_res_taken[i])
    );
  end
endmodule
