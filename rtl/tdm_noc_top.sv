// tdm_noc_top: the two-switch (version 2) TDM fat-tree NoC for data.
//
// N_SRC source modules (storage modules holding the coefficient, original-
// image, compared-image and result data) send typed data words to N_PM
// processing nodes (PNs). Each source has N_SW network adapters (NAs); NA k of
// every source feeds input FIFO Fifo_in<k>, and Fifo_in<k> of all sources
// feed main switch k. Switch k writes into N_PM*VC_PER_PM output VC FIFOs
// (Fifo_out<k><v>, v = PN*VC_PER_PM + channel); the output switch of each PN
// gathers its VC_PER_PM channels from every main switch and hands whole
// packets to the PN as a flit stream. With the defaults: 4 sources x 2 NAs,
// 2 switches of 4 inputs and 8 VCs, 16 VC FIFOs of 32 8-bit flits, 4 PNs.
//
// Clocking is globally asynchronous, locally synchronous: each source module
// and each PN has its own clock; the NAs' flit side, the input FIFOs' both
// sides and the main switches run on noc_clk. The NA packet FIFOs cross from
// src_clk to noc_clk and the output VC FIFOs from noc_clk to pm_clk.
//
// Source interface (per source s and adapter k): a word (id, p, int_length,
// data) is taken when src_valid and src_ready are both high. The NA of source
// s is sized for the data width of type id s (56, 48, 48, 8 bits), taken from
// the low bits of src_data. PN interface: pm_flit is taken when pm_valid and
// pm_ready are both high; pm_sop/pm_eop mark a packet's first and last flit.
//
// The structure and sizes follow the paper; how each source shares its words
// between its two adapters, and which Fifo_out feeds which PN switch, are this
// design's choices (the source drives each adapter separately; Fifo_out<k><v>
// serves PN v / VC_PER_PM). With N_SW = 1 and FLIT_W = 24 the same RTL gives
// the paper's one-switch version 1 shape, but with network adapters in front.
module tdm_noc_top
  import noc_pkg::*;
#(
  parameter int N_SRC     = 4,
  parameter int N_SW      = 2,
  parameter int N_PM      = 4,
  parameter int VC_PER_PM = 2,
  parameter int FLIT_W    = 8,
  parameter int DEPTH     = 32,
  parameter int DATA_W    = 56
) (
  input  logic              src_clk   [N_SRC],
  input  logic              src_rst_n [N_SRC],
  input  logic              noc_clk,
  input  logic              noc_rst_n,
  input  logic              pm_clk    [N_PM],
  input  logic              pm_rst_n  [N_PM],

  input  logic              src_valid      [N_SRC][N_SW],
  output logic              src_ready      [N_SRC][N_SW],
  input  logic [1:0]        src_id         [N_SRC][N_SW],
  input  logic [1:0]        src_p          [N_SRC][N_SW],
  input  logic [3:0]        src_int_length [N_SRC][N_SW],
  input  logic [DATA_W-1:0] src_data       [N_SRC][N_SW],

  output logic              pm_valid [N_PM],
  input  logic              pm_ready [N_PM],
  output logic [FLIT_W-1:0] pm_flit  [N_PM],
  output logic              pm_sop   [N_PM],
  output logic              pm_eop   [N_PM],

  output vc_state_t         vc_state [N_SW][N_PM*VC_PER_PM]
);
  localparam int N_VC = N_PM * VC_PER_PM;

  // Input side: NA -> Fifo_in, per source and switch.
  logic [N_SRC-1:0]   in_empty [N_SW];
  logic [N_SRC-1:0]   in_pop   [N_SW];
  logic [FLIT_W-1:0]  in_flit  [N_SW][N_SRC];

  for (genvar s = 0; s < N_SRC; s++) begin : g_src
    localparam int DW = data_bits(2'(s));
    for (genvar k = 0; k < N_SW; k++) begin : g_na
      logic              f_valid, f_ready, f_first, in_full, in_drained;
      logic [FLIT_W-1:0] f_flit;

      network_adapter #(.DATA_W(DW), .FLIT_W(FLIT_W), .NA_DEPTH(DEPTH)) u_na (
        .mod_clk(src_clk[s]), .mod_rst_n(src_rst_n[s]),
        .in_valid(src_valid[s][k]), .in_ready(src_ready[s][k]),
        .id(src_id[s][k]), .p(src_p[s][k]), .int_length(src_int_length[s][k]),
        .data(src_data[s][k][DW-1:0]),
        .flit_clk(noc_clk), .flit_rst_n(noc_rst_n),
        .flit_valid(f_valid), .flit_ready(f_ready), .flit_first(f_first), .flit(f_flit)
      );

      assign f_ready = !in_full;

      vc_fifo #(.WIDTH(FLIT_W), .DEPTH(DEPTH)) u_fifo_in (
        .wr_clk(noc_clk), .wr_rst_n(noc_rst_n), .wr_en(f_valid && f_ready), .wr_data(f_flit),
        .wr_full(in_full), .wr_empty(in_drained),
        .rd_clk(noc_clk), .rd_rst_n(noc_rst_n), .rd_en(in_pop[k][s]),
        .rd_data(in_flit[k][s]), .rd_empty(in_empty[k][s])
      );
    end
  end

  // Main switches and their output VC FIFOs.
  logic [N_VC-1:0]   out_full    [N_SW];
  logic [N_VC-1:0]   out_drained [N_SW];
  logic [N_VC-1:0]   out_push    [N_SW];
  logic [FLIT_W-1:0] out_flit    [N_SW][N_VC];
  logic [N_VC-1:0]   vc_empty_o  [N_SW];
  logic [N_VC-1:0]   vc_pop_o    [N_SW];
  logic [FLIT_W-1:0] vc_head     [N_SW][N_VC];

  for (genvar k = 0; k < N_SW; k++) begin : g_sw
    main_switch #(.N_IN(N_SRC), .N_PM(N_PM), .VC_PER_PM(VC_PER_PM), .FLIT_W(FLIT_W)) u_switch (
      .clk(noc_clk), .rst_n(noc_rst_n),
      .in_empty(in_empty[k]), .in_flit(in_flit[k]), .in_pop(in_pop[k]),
      .out_full(out_full[k]), .out_drained(out_drained[k]),
      .out_push(out_push[k]), .out_flit(out_flit[k]), .vc_state(vc_state[k])
    );

    for (genvar v = 0; v < N_VC; v++) begin : g_vc
      vc_fifo #(.WIDTH(FLIT_W), .DEPTH(DEPTH)) u_fifo_out (
        .wr_clk(noc_clk), .wr_rst_n(noc_rst_n), .wr_en(out_push[k][v]), .wr_data(out_flit[k][v]),
        .wr_full(out_full[k][v]), .wr_empty(out_drained[k][v]),
        .rd_clk(pm_clk[v / VC_PER_PM]), .rd_rst_n(pm_rst_n[v / VC_PER_PM]),
        .rd_en(vc_pop_o[k][v]), .rd_data(vc_head[k][v]), .rd_empty(vc_empty_o[k][v])
      );
    end
  end

  // Output switch per processing node: VC index j = k*VC_PER_PM + c.
  for (genvar m = 0; m < N_PM; m++) begin : g_pm
    localparam int NV = N_SW * VC_PER_PM;
    logic [NV-1:0]     e, pop;
    logic [FLIT_W-1:0] f [NV];

    for (genvar k = 0; k < N_SW; k++) begin : g_k
      for (genvar c = 0; c < VC_PER_PM; c++) begin : g_c
        assign e[k*VC_PER_PM + c] = vc_empty_o[k][m*VC_PER_PM + c];
        assign f[k*VC_PER_PM + c] = vc_head[k][m*VC_PER_PM + c];
        assign vc_pop_o[k][m*VC_PER_PM + c] = pop[k*VC_PER_PM + c];
      end
    end

    output_switch #(.N_VC(NV), .FLIT_W(FLIT_W)) u_out (
      .clk(pm_clk[m]), .rst_n(pm_rst_n[m]), .vc_empty(e), .vc_flit(f), .vc_pop(pop),
      .pm_valid(pm_valid[m]), .pm_ready(pm_ready[m]), .pm_flit(pm_flit[m]),
      .pm_sop(pm_sop[m]), .pm_eop(pm_eop[m])
    );
  end
endmodule
