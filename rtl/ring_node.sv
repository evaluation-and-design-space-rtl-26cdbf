// ring_node: a module's station on the command/result ring.
//
// The ring carries packets of four 8-bit flits (header + three payload flits)
// from the control module round all modules and back. Each station holds the
// wrapper's receive unit (from the previous station) and send unit (to the
// next), which talk four-phase handshakes across clock domains, and between
// them it inspects each packet as it passes, one flit at a time:
//  - a command packet addressed to MY_ADDR is taken: its three payload flits
//    are delivered to the module (cmd_valid for one cycle with cmd_data, MSB
//    first flit) and the packet goes on as an empty packet with zero payload;
//  - an empty packet, while the module offers a result (res_valid), is filled:
//    header {RESULT, MY_ADDR}, payload res_data, and res_taken pulses once
//    when the header leaves (res_data is captured then);
//  - any other packet passes unchanged.
// The paper gives the ring, the 8-bit flits, the four-flit packets, command
// and empty packets, and the wrapper with independent receive and send units;
// the header format and the take/fill rules are this design's choices.
module ring_node
  import noc_pkg::*;
#(
  parameter logic [5:0] MY_ADDR     = 6'd1,
  parameter int         SYNC_STAGES = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // ring in (from previous station)
  input  logic                      req_i,
  input  logic [7:0]                data_i,
  output logic                      ack_o,
  // ring out (to next station)
  output logic                      req_o,
  output logic [7:0]                data_o,
  input  logic                      ack_i,
  // module side
  output logic                      cmd_valid,
  output logic [RING_PAYLOAD_W-1:0] cmd_data,
  input  logic                      res_valid,
  input  logic [RING_PAYLOAD_W-1:0] res_data,
  output logic                      res_taken
);
  typedef enum logic [1:0] {ACT_PASS, ACT_TAKE, ACT_FILL} act_t;

  logic       rx_valid, rx_ready, tx_ready, fire;
  logic [7:0] rx_flit, tx_flit;
  logic [1:0] idx;
  act_t       act, act_now;
  logic [RING_PAYLOAD_W-1:0] res_buf, cmd_buf;
  ring_header_t h;

  hs4_rx #(.W(8), .SYNC_STAGES(SYNC_STAGES)) u_rx (
    .clk, .rst_n, .req_i, .data_i, .ack_o, .valid(rx_valid), .ready(rx_ready), .data(rx_flit)
  );
  hs4_tx #(.W(8), .SYNC_STAGES(SYNC_STAGES)) u_tx (
    .clk, .rst_n, .valid(rx_valid), .ready(tx_ready), .data(tx_flit), .req_o, .data_o, .ack_i
  );

  assign rx_ready = tx_ready;
  assign fire     = rx_valid && tx_ready;
  assign h        = ring_header_t'(rx_flit);

  always_comb begin
    act_now = act;
    tx_flit = rx_flit;
    if (idx == 2'd0) begin
      if (h.kind == RP_CMD && h.addr == MY_ADDR) begin
        act_now = ACT_TAKE;
        tx_flit = {RP_EMPTY, 6'd0};
      end else if (h.kind == RP_EMPTY && res_valid) begin
        act_now = ACT_FILL;
        tx_flit = {RP_RESULT, MY_ADDR};
      end else begin
        act_now = ACT_PASS;
      end
    end else begin
      case (act)
        ACT_TAKE: tx_flit = 8'h00;
        ACT_FILL: tx_flit = res_buf[RING_PAYLOAD_W - 8*int'(idx) +: 8];
        default:  tx_flit = rx_flit;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      act       <= ACT_PASS;
      res_buf   <= '0;
      cmd_buf   <= '0;
      cmd_valid <= 1'b0;
      cmd_data  <= '0;
      res_taken <= 1'b0;
    end else begin
      cmd_valid <= 1'b0;
      res_taken <= 1'b0;
      if (fire) begin
        idx <= idx + 2'd1;
        act <= act_now;
        if (idx == 2'd0 && act_now == ACT_FILL) begin
          res_buf   <= res_data;
          res_taken <= 1'b1;
        end
        if (idx != 2'd0 && act == ACT_TAKE) begin
          cmd_buf[RING_PAYLOAD_W - 8*int'(idx) +: 8] <= rx_flit;
          if (idx == 2'(RING_FLITS - 1)) begin
            cmd_valid <= 1'b1;
            cmd_data  <= {cmd_buf[RING_PAYLOAD_W-1:8], rx_flit};
          end
        end
      end
    end
  end
endmodule
