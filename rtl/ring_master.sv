// ring_master: the control module's station on the command/result ring.
//
// The control module owns the ring: it keeps up to N_PKTS packets (four, as
// in the paper) travelling round it. Whenever fewer are in flight and its send
// unit is free, it starts a new packet: a command packet {CMD, cmd_dest} with
// cmd_data as payload if a command waits (cmd_valid; taken with cmd_ready),
// otherwise an empty packet that any module may fill with a result. Every
// packet that comes back is absorbed; a result packet is reported on
// res_valid (one cycle) with the sender's address and the payload. Ring
// links use the wrapper's four-phase send and receive units. The packet count
// and kinds follow the paper; the injection rule is this design's choice.
module ring_master
  import noc_pkg::*;
#(
  parameter int N_PKTS      = 4,
  parameter int SYNC_STAGES = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      req_o,
  output logic [7:0]                data_o,
  input  logic                      ack_i,
  input  logic                      req_i,
  input  logic [7:0]                data_i,
  output logic                      ack_o,
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  logic [5:0]                cmd_dest,
  input  logic [RING_PAYLOAD_W-1:0] cmd_data,
  output logic                      res_valid,
  output logic [5:0]                res_src,
  output logic [RING_PAYLOAD_W-1:0] res_data,
  output logic [7:0]                in_flight
);
  logic       tx_ready, tx_valid, rx_valid, tx_fire, rx_fire;
  logic [7:0] tx_flit, rx_flit;
  logic [1:0] tx_idx, rx_idx;
  logic       tx_active, start;
  logic [7:0]                tx_hdr;
  logic [RING_PAYLOAD_W-1:0] tx_buf, rx_buf;
  ring_header_t              rx_hdr;

  hs4_tx #(.W(8), .SYNC_STAGES(SYNC_STAGES)) u_tx (
    .clk, .rst_n, .valid(tx_valid), .ready(tx_ready), .data(tx_flit), .req_o, .data_o, .ack_i
  );
  hs4_rx #(.W(8), .SYNC_STAGES(SYNC_STAGES)) u_rx (
    .clk, .rst_n, .req_i, .data_i, .ack_o, .valid(rx_valid), .ready(1'b1), .data(rx_flit)
  );

  assign start     = !tx_active && (int'(in_flight) < N_PKTS);
  assign cmd_ready = start;
  assign tx_valid  = tx_active;
  assign tx_flit   = (tx_idx == 2'd0) ? tx_hdr : tx_buf[RING_PAYLOAD_W - 8*int'(tx_idx) +: 8];
  assign tx_fire   = tx_valid && tx_ready;
  assign rx_fire   = rx_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_active <= 1'b0;
      tx_idx    <= '0;
      tx_hdr    <= '0;
      tx_buf    <= '0;
      rx_idx    <= '0;
      rx_buf    <= '0;
      rx_hdr    <= '0;
      in_flight <= '0;
      res_valid <= 1'b0;
      res_src   <= '0;
      res_data  <= '0;
    end else begin
      res_valid <= 1'b0;
      // injection
      if (start) begin
        tx_active <= 1'b1;
        tx_idx    <= '0;
        tx_hdr    <= cmd_valid ? {RP_CMD, cmd_dest} : {RP_EMPTY, 6'd0};
        tx_buf    <= cmd_valid ? cmd_data : '0;
      end else if (tx_fire) begin
        tx_idx <= tx_idx + 2'd1;
        if (tx_idx == 2'(RING_FLITS - 1)) tx_active <= 1'b0;
      end
      // reception
      if (rx_fire) begin
        rx_idx <= rx_idx + 2'd1;
        if (rx_idx == 2'd0) rx_hdr <= ring_header_t'(rx_flit);
        else rx_buf[RING_PAYLOAD_W - 8*int'(rx_idx) +: 8] <= rx_flit;
        if (rx_idx == 2'(RING_FLITS - 1) && rx_hdr.kind == RP_RESULT) begin
          res_valid <= 1'b1;
          res_src   <= rx_hdr.addr;
          res_data  <= {rx_buf[RING_PAYLOAD_W-1:8], rx_flit};
        end
      end
      in_flight <= in_flight + 8'(start) - 8'(rx_fire && rx_idx == 2'(RING_FLITS - 1));
    end
  end
endmodule
