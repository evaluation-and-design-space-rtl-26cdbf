// adaptor_tdm: time-division slot counter of the network adapter.
//
// A packet occupies the flit link for Nb_flit consecutive flit slots. This
// block counts those slots and issues 'load', the strobe that pops the next
// packet from the NA's packet FIFO, once per packet: at the rate f_flit /
// Nb_flit when the link never stalls. The paper draws this strobe as a derived
// clock (Clk_o); here it is a clock enable in the flit clock domain, which is
// this design's choice. The count advances only on 'advance' (a flit accepted
// downstream), so a stalled link holds the slot. A new packet is loaded in the
// same cycle the last flit of the previous one leaves, so packets follow back
// to back. 'first' and 'last' flag the header and the final flit.
module adaptor_tdm (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pkt_avail,  // a packet waits in the packet FIFO
  input  logic [7:0] nb_flit,    // flits of the waiting packet
  input  logic       advance,    // current flit accepted
  output logic       load,       // pop and load the waiting packet
  output logic       busy,       // a packet is being cut
  output logic       first,
  output logic       last,
  output logic [7:0] slot
);
  logic [7:0] nb_cur;

  assign first = busy && (slot == 8'd0);
  assign last  = busy && (slot == nb_cur - 8'd1);
  assign load  = pkt_avail && (!busy || (advance && last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      slot   <= '0;
      nb_cur <= 8'd1;
    end else if (load) begin
      busy   <= 1'b1;
      slot   <= '0;
      nb_cur <= nb_flit;
    end else if (advance && busy) begin
      if (last) busy <= 1'b0;
      slot <= slot + 8'd1;
    end
  end
endmodule
