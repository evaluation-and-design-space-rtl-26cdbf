// hs4_rx: receive unit of a module's asynchronous wrapper.
//
// Counterpart of hs4_tx. The request from the other clock domain passes
// SYNC_STAGES flip-flops; when it is seen high and the output register is
// free, the bundled flit on data_i (stable since before the request) is
// captured and ack_o is raised; when the request is seen low again ack_o
// falls. The captured flit is offered on data/valid until the module takes
// it with ready, and the next flit is not acknowledged before that, so the
// module can hold the ring back. The handshake and the synchronisers follow
// the paper; the output register is this design's choice.
module hs4_rx #(
  parameter int W           = 8,
  parameter int SYNC_STAGES = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_i,
  input  logic [W-1:0] data_i,
  output logic         ack_o,
  output logic         valid,
  input  logic         ready,
  output logic [W-1:0] data
);
  logic [SYNC_STAGES-1:0] req_sync;
  logic                   req_s;

  assign req_s = req_sync[SYNC_STAGES-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_sync <= '0;
    else        req_sync <= {req_sync[SYNC_STAGES-2:0], req_i};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_o <= 1'b0;
      valid <= 1'b0;
      data  <= '0;
    end else begin
      if (valid && ready) valid <= 1'b0;
      if (req_s && !ack_o && (!valid || ready)) begin
        data  <= data_i;
        valid <= 1'b1;
        ack_o <= 1'b1;
      end else if (!req_s && ack_o) begin
        ack_o <= 1'b0;
      end
    end
  end
endmodule
