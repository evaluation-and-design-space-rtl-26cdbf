// adaptor_flit: cuts a packet into flits.
//
// A shift register of NF = ceil(PKT_W/FLIT_W) flits is loaded with the packet
// (left-aligned, zero padding at the end) and shifted by one flit on every
// 'advance', so 'flit' shows the header first and then the following flits,
// one per flit clock. 'load' wins over 'advance' when both are high, which is
// what lets the next packet follow the previous one's last flit directly. The
// paper gives the function and the 8-bit flit; the header-first order and the
// shift register are this design's choices.
module adaptor_flit #(
  parameter int PKT_W  = 72,
  parameter int FLIT_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [PKT_W-1:0]  data_pack,
  input  logic              advance,
  output logic [FLIT_W-1:0] flit
);
  localparam int NF  = (PKT_W + FLIT_W - 1) / FLIT_W;
  localparam int SHW = NF * FLIT_W;

  logic [SHW-1:0] sh;

  assign flit = sh[SHW-1 -: FLIT_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       sh <= '0;
    else if (load)    sh <= SHW'(data_pack) << (SHW - PKT_W);
    else if (advance) sh <= sh << FLIT_W;
  end
endmodule
