// hs4_tx: send unit of a module's asynchronous wrapper.
//
// Sends one 8-bit flit at a time to a receiver in another clock domain with a
// single-rail (bundled data), four-phase handshake: the flit is put on
// data_o and req_o raised; after the receiver's ack_i has been seen high
// (through SYNC_STAGES flip-flops) req_o falls; after ack_i has been seen low
// again the unit is ready for the next flit. data_o is held from req_o rising
// until ack_i is seen high. The paper specifies the single-rail four-phase
// handshake, the two-flip-flop synchronisers and a send unit working
// independently of the receive unit; the state machine is this design's. A
// flit is taken from the module when valid and ready are both high.
module hs4_tx #(
  parameter int W           = 8,
  parameter int SYNC_STAGES = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  output logic         ready,
  input  logic [W-1:0] data,
  output logic         req_o,
  output logic [W-1:0] data_o,
  input  logic         ack_i
);
  typedef enum logic [1:0] {TX_IDLE, TX_WAIT_ACK, TX_WAIT_NACK} tx_state_t;
  tx_state_t              state;
  logic [SYNC_STAGES-1:0] ack_sync;
  logic                   ack_s;

  assign ack_s = ack_sync[SYNC_STAGES-1];
  assign ready = (state == TX_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ack_sync <= '0;
    else        ack_sync <= {ack_sync[SYNC_STAGES-2:0], ack_i};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= TX_IDLE;
      req_o  <= 1'b0;
      data_o <= '0;
    end else begin
      case (state)
        TX_IDLE:      if (valid) begin data_o <= data; req_o <= 1'b1; state <= TX_WAIT_ACK; end
        TX_WAIT_ACK:  if (ack_s) begin req_o <= 1'b0; state <= TX_WAIT_NACK; end
        TX_WAIT_NACK: if (!ack_s) state <= TX_IDLE;
        default:      state <= TX_IDLE;
      endcase
    end
  end

  // Bundled data: the flit must not change while the request is up.
  assert property (@(posedge clk) disable iff (!rst_n) (req_o && $past(req_o)) |-> $stable(data_o))
    else $error("hs4_tx: data changed during the handshake");
endmodule
