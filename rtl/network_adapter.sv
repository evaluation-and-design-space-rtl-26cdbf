// network_adapter: the TDM network adapter (NA) in front of each NoC input.
//
// A data word of the sending module becomes a packet in adaptor_pack, waits in
// the packet FIFO (Fifo_NA, NA_DEPTH packets deep) and is cut into FLIT_W-bit
// flits by adaptor_flit, paced by adaptor_tdm with the flit count that
// adaptor_type derives from the id in the packet's header. Fifo_NA is
// bi-synchronous and is where the data crosses from the module clock to the
// flit (NoC) clock, which the paper runs faster. The five sub-blocks and their
// wiring follow the paper's NA drawing; taking the flit count from the stored
// header instead of the external id pin, and the valid/ready flit handshake,
// are this design's choices. Timing: a word taken at a mod_clk edge is written
// into Fifo_NA one mod_clk later; after the FIFO's synchroniser delay the
// header flit appears on 'flit' one flit_clk after the load, and one flit per
// flit_clk follows while flit_ready is high.
module network_adapter
  import noc_pkg::*;
#(
  parameter int DATA_W   = 56,
  parameter int FLIT_W   = 8,
  parameter int NA_DEPTH = 32,
  localparam int PKT_W   = HDR_W + DATA_W + TAIL_W
) (
  input  logic              mod_clk,
  input  logic              mod_rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [1:0]        id,
  input  logic [1:0]        p,
  input  logic [3:0]        int_length,
  input  logic [DATA_W-1:0] data,
  input  logic              flit_clk,
  input  logic              flit_rst_n,
  output logic              flit_valid,
  input  logic              flit_ready,
  output logic              flit_first,
  output logic [FLIT_W-1:0] flit
);
  logic             pack_wr, fifo_full, fifo_drained, fifo_empty;
  logic [PKT_W-1:0] data_pack, head_pack;
  logic [7:0]       nb_flit;
  logic             load, busy, first, last, advance;
  logic [7:0]       slot;

  adaptor_pack #(.DATA_W(DATA_W)) u_pack (
    .clk(mod_clk), .rst_n(mod_rst_n), .in_valid, .in_ready, .id, .p, .int_length, .data,
    .fifo_full, .pack_wr, .data_pack
  );

  vc_fifo #(.WIDTH(PKT_W), .DEPTH(NA_DEPTH)) u_fifo_na (
    .wr_clk(mod_clk), .wr_rst_n(mod_rst_n), .wr_en(pack_wr), .wr_data(data_pack),
    .wr_full(fifo_full), .wr_empty(fifo_drained),
    .rd_clk(flit_clk), .rd_rst_n(flit_rst_n), .rd_en(load), .rd_data(head_pack), .rd_empty(fifo_empty)
  );

  adaptor_type #(.FLIT_W(FLIT_W)) u_type (
    .id(head_pack[PKT_W-1 -: 2]), .nb_flit
  );

  adaptor_tdm u_tdm (
    .clk(flit_clk), .rst_n(flit_rst_n), .pkt_avail(!fifo_empty), .nb_flit, .advance,
    .load, .busy, .first, .last, .slot
  );

  adaptor_flit #(.PKT_W(PKT_W), .FLIT_W(FLIT_W)) u_flit (
    .clk(flit_clk), .rst_n(flit_rst_n), .load, .data_pack(head_pack), .advance, .flit
  );

  assign flit_valid = busy;
  assign flit_first = first;
  assign advance    = flit_valid && flit_ready;
endmodule
