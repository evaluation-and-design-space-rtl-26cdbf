// noc_pkg: types and constants shared by the blocks of the TDM fat-tree data NoC.
//
// A packet is a header byte, a data field whose width depends on the data type,
// and the constant tail byte FF, most significant bits first. The header holds
// {id[1:0], p[1:0], int_length[3:0]}: the data type, the destination processing
// node and the position of the fixed point. The four data types of the
// multispectral authentication application and their data widths (56, 48, 48
// and 8 bits, giving 72, 64, 64 and 24-bit packets) follow the paper. The
// header field widths follow the bit positions the paper prints for its
// packets; the port widths of its adaptor drawing (3-bit P and int_length)
// disagree and were not followed. The ring packet format (kind and address
// fields) is this design's choice: the paper gives only the packet shape.
package noc_pkg;

  localparam int HDR_W  = 8;
  localparam int TAIL_W = 8;
  localparam logic [TAIL_W-1:0] TAIL = 8'hFF;

  typedef enum logic [1:0] {
    ID_COEF = 2'b00,  // colour-space coefficients, 56-bit data
    ID_ORG  = 2'b01,  // original (reference) image data, 48-bit data
    ID_COM  = 2'b10,  // compared image data, 48-bit data
    ID_RES  = 2'b11   // result, 8-bit data
  } data_id_t;

  typedef struct packed {
    data_id_t   id;
    logic [1:0] p;           // destination processing node
    logic [3:0] int_length;  // fixed-point position
  } header_t;

  // Data width in bits of each data type.
  function automatic int data_bits(input logic [1:0] id);
    case (id)
      2'b00:   return 56;
      2'b01:   return 48;
      2'b10:   return 48;
      default: return 8;
    endcase
  endfunction

  // Packet width in bits (header + data + tail).
  function automatic int packet_bits(input logic [1:0] id);
    return HDR_W + data_bits(id) + TAIL_W;
  endfunction

  // Number of flits of a packet for a given flit width (rounded up).
  function automatic int unsigned nb_flits(input logic [1:0] id, input int flit_w);
    return (packet_bits(id) + flit_w - 1) / flit_w;
  endfunction

  // Header of the first flit: its top HDR_W bits.
  function automatic header_t flit_header(input logic [63:0] flit, input int flit_w);
    return header_t'(flit[flit_w-1 -: HDR_W]);
  endfunction

  // State of an output virtual channel, as kept by the arbitration unit.
  typedef enum logic [1:0] {
    VC_IDLE  = 2'd0,  // free, FIFO drained
    VC_READY = 2'd1,  // granted to an input, header not yet written
    VC_BUSY  = 2'd2,  // packet flowing
    VC_EMPTY = 2'd3   // tail written, waiting for the FIFO to drain
  } vc_state_t;

  // ---- command / result ring ----
  // A ring packet is RING_FLITS 8-bit flits: a header {kind, address} and
  // three payload flits. Command packets go from the control module to the
  // addressed module; empty packets may be filled by any module with a
  // result for the control module (address = the sender).
  localparam int RING_FLITS = 4;
  localparam int RING_PAYLOAD_W = 8 * (RING_FLITS - 1);

  typedef enum logic [1:0] {
    RP_EMPTY  = 2'b00,
    RP_CMD    = 2'b01,
    RP_RESULT = 2'b10
  } ring_kind_t;

  typedef struct packed {
    ring_kind_t kind;
    logic [5:0] addr;
  } ring_header_t;

endpackage
