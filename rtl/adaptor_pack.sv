// adaptor_pack: builds a packet from a data word of the sending module.
//
// The packet is {header, data, tail} most significant bits first, where the
// header is {id, p, int_length} and the tail the constant FF (paper). The data
// width follows the type id (56, 48, 48 or 8 bits, taken from the low bits of
// 'data'); the packet is left-aligned in the 16+DATA_W bit output word and
// zero-filled below the tail. One pipeline register sits between the module
// and the NA's packet FIFO: a word offered with in_valid is taken when
// in_ready is high and appears on data_pack/pack_wr at the next clock edge;
// pack_wr stays high until the FIFO has room (fifo_full low), which is when it
// is written. The handshake and the register are this design's choices.
module adaptor_pack
  import noc_pkg::*;
#(
  parameter int DATA_W = 56,
  localparam int PKT_W = HDR_W + DATA_W + TAIL_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [1:0]        id,
  input  logic [1:0]        p,
  input  logic [3:0]        int_length,
  input  logic [DATA_W-1:0] data,
  input  logic              fifo_full,
  output logic              pack_wr,
  output logic [PKT_W-1:0]  data_pack
);
  logic             out_valid;
  logic [PKT_W-1:0] pkt;

  // Assemble the packet for the current type.
  always_comb begin
    int dw;
    logic [PKT_W-1:0] d;
    dw = data_bits(id);
    if (dw > DATA_W) dw = DATA_W;
    d   = PKT_W'(data) & ~({PKT_W{1'b1}} << dw);
    pkt = PKT_W'({id, p, int_length}) << (PKT_W - HDR_W);
    pkt |= d << (PKT_W - HDR_W - dw);
    pkt |= PKT_W'(TAIL) << (PKT_W - HDR_W - dw - TAIL_W);
  end

  assign in_ready = !out_valid || !fifo_full;
  assign pack_wr  = out_valid && !fifo_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      data_pack <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) data_pack <= pkt;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> data_bits(id) <= DATA_W)
    else $error("adaptor_pack: data type wider than DATA_W");
endmodule
