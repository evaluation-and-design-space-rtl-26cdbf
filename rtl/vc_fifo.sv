// vc_fifo: bi-synchronous FIFO, the buffer behind every virtual channel and
// the packet FIFO of the network adapter.
//
// Write and read sides run on their own clocks. Each side keeps a binary
// pointer one bit wider than the address and passes its Gray-coded copy to the
// other side through SYNC_STAGES flip-flops (two, as the paper uses between
// clock domains). Full is seen on the write side, empty on the read side, both
// conservatively, so no entry is ever lost or read twice. The read port is
// show-ahead: rd_data is the head entry whenever rd_empty is low, and rd_en
// removes it at the next rd_clk edge. wr_empty tells the write side that every
// word it wrote has been read (it lags the read side by the synchroniser
// delay); the arbitration unit uses it to know when a virtual channel has
// drained. A word written at a wr_clk edge is visible on the read side
// SYNC_STAGES+1 rd_clk edges later. The paper gives the depth (32) and says
// the FIFOs are bi-synchronous; the pointer scheme is this design's choice.
// DEPTH must be a power of two. Resets are asynchronous, active low.
module vc_fifo #(
  parameter int WIDTH       = 8,
  parameter int DEPTH       = 32,
  parameter int SYNC_STAGES = 2
) (
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_full,
  output logic             wr_empty,
  input  logic             rd_clk,
  input  logic             rd_rst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_empty
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_sync [SYNC_STAGES];
  logic [AW:0] wgray_sync [SYNC_STAGES];

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  logic [AW:0] wbin_next;
  assign wbin_next = wbin + (AW+1)'(1);
  assign wr_full  = (wgray == {~rgray_sync[SYNC_STAGES-1][AW:AW-1], rgray_sync[SYNC_STAGES-1][AW-2:0]});
  assign wr_empty = (wgray == rgray_sync[SYNC_STAGES-1]);

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin  <= '0;
      wgray <= '0;
    end else if (wr_en && !wr_full) begin
      wbin  <= wbin_next;
      wgray <= bin2gray(wbin_next);
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      for (int i = 0; i < SYNC_STAGES; i++) rgray_sync[i] <= '0;
    end else begin
      rgray_sync[0] <= rgray;
      for (int i = 1; i < SYNC_STAGES; i++) rgray_sync[i] <= rgray_sync[i-1];
    end
  end

  // ---------------- read side ----------------
  logic [AW:0] rbin_next;
  assign rbin_next = rbin + (AW+1)'(1);
  assign rd_empty  = (rgray == wgray_sync[SYNC_STAGES-1]);
  assign rd_data   = mem[rbin[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin  <= '0;
      rgray <= '0;
    end else if (rd_en && !rd_empty) begin
      rbin  <= rbin_next;
      rgray <= bin2gray(rbin_next);
    end
  end

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      for (int i = 0; i < SYNC_STAGES; i++) wgray_sync[i] <= '0;
    end else begin
      wgray_sync[0] <= wgray;
      for (int i = 1; i < SYNC_STAGES; i++) wgray_sync[i] <= wgray_sync[i-1];
    end
  end

  initial begin
    assert (DEPTH >= 4 && (1 << AW) == DEPTH) else $error("vc_fifo: DEPTH must be a power of two >= 4");
  end

endmodule
