// adaptor_type: the network adapter's type decoder.
//
// From the 2-bit data type id it gives Nb_flit, the number of FLIT_W-bit flits
// the packet of that type needs: ceil((8 + data bits + 8) / FLIT_W). With
// 8-bit flits the four types of the application (coefficient, original image,
// compared image, result) need 9, 8, 8 and 3 flits. The paper names the block
// and its job; building it as a constant combinational table (no clock) is
// this design's choice. Purely combinational, no latency.
module adaptor_type
  import noc_pkg::*;
#(
  parameter int FLIT_W = 8
) (
  input  logic [1:0] id,
  output logic [7:0] nb_flit
);
  always_comb begin
    nb_flit = 8'(nb_flits(id, FLIT_W));
  end
endmodule
