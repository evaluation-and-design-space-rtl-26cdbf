// tb_network_adapter: two NAs (56-bit and 8-bit data) with the module clock at
// 10 ns and the flit clock at 6 ns. Random words of every type that fits are
// sent; the flit stream is rebuilt into packets and compared with packets
// built independently here ({id,p,int_length}, data, FF). Also checks that
// with flit_ready held high a packet's flits leave on consecutive flit clocks
// (Nb_flit cycles per packet), that a stalled link loses nothing, and the
// flit_first marker.
module tb_network_adapter;
  logic mclk = 0, fclk = 0, mrst_n = 0, frst_n = 0;
  int checks = 0, failures = 0;
  always #5 mclk = ~mclk;
  always #3 fclk = ~fclk;

  logic in_valid = 0, in_ready, f_valid, f_ready = 1, f_first;
  logic [1:0] id = '0, p = '0; logic [3:0] il = '0; logic [55:0] data = '0;
  logic [7:0] flit;
  network_adapter #(.DATA_W(56)) dut (.mod_clk(mclk), .mod_rst_n(mrst_n), .in_valid, .in_ready, .id, .p,
    .int_length(il), .data, .flit_clk(fclk), .flit_rst_n(frst_n), .flit_valid(f_valid), .flit_ready(f_ready),
    .flit_first(f_first), .flit);

  logic r_valid = 0, r_ready, r_fv, r_first; logic [7:0] r_flit;
  logic [7:0] r_data = '0;
  network_adapter #(.DATA_W(8)) dut_res (.mod_clk(mclk), .mod_rst_n(mrst_n), .in_valid(r_valid), .in_ready(r_ready),
    .id(2'b11), .p(2'b10), .int_length(4'h3), .data(r_data), .flit_clk(fclk), .flit_rst_n(frst_n),
    .flit_valid(r_fv), .flit_ready(1'b1), .flit_first(r_first), .flit(r_flit));

  logic [7:0] exp_flits[$];
  int pkt_len[$];
  int gaps = 0, res_flits = 0;

  function automatic void add_expected(logic [1:0] i, logic [1:0] pp, logic [3:0] l, logic [55:0] d);
    logic [71:0] pk; int n;
    case (i)
      2'b00: begin pk = {i, pp, l, d[55:0], 8'hFF}; n = 9; end
      2'b01, 2'b10: begin pk = {i, pp, l, d[47:0], 8'hFF, 8'h00}; n = 8; end
      default: begin pk = {i, pp, l, d[7:0], 8'hFF, 48'h0}; n = 3; end
    endcase
    for (int f = 0; f < n; f++) exp_flits.push_back(pk[71 - 8*f -: 8]);
    pkt_len.push_back(n);
  endfunction

  initial begin #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge mclk) if (mrst_n && in_valid && in_ready) add_expected(id, p, il, data);

  // Flit checker.
  int fidx = 0, in_pkt = -1;
  logic prev_valid = 0;
  always @(posedge fclk) if (frst_n) begin
    if (f_valid && f_ready) begin
      checks++;
      if (exp_flits.size() == 0 || flit != exp_flits[0]) begin
        failures++; $display("FAIL flit %h expected %h", flit, exp_flits.size() != 0 ? exp_flits[0] : 8'h0);
      end
      checks++;
      if (f_first != (fidx == 0)) begin failures++; $display("FAIL flit_first"); end
      if (exp_flits.size() != 0) void'(exp_flits.pop_front());
      fidx++;
      if (pkt_len.size() != 0 && fidx == pkt_len[0]) begin void'(pkt_len.pop_front()); fidx = 0; end
    end
    // rate: inside a packet, with ready high, valid must not drop
    if (fidx != 0 && f_ready && !f_valid) gaps++;
  end

  // Result NA: 3 flits, last is FF.
  always @(posedge fclk) if (frst_n && r_fv) begin
    res_flits++;
    checks++;
    case ((res_flits - 1) % 3)
      0: if (r_flit != 8'b11_10_0011) begin failures++; $display("FAIL res header %h", r_flit); end
      1: if (r_flit != 8'(((res_flits - 1) / 3) + 1)) begin failures++; $display("FAIL res data %h", r_flit); end
      default: if (r_flit != 8'hFF) begin failures++; $display("FAIL res tail %h", r_flit); end
    endcase
  end

  initial begin
    #23 mrst_n = 1; frst_n = 1;
    fork
      begin
        for (int n = 0; n < 60; ) begin
          @(negedge mclk);
          if (in_valid && !in_ready) continue;
          in_valid = 1;
          id = 2'($urandom); p = 2'($urandom); il = 4'($urandom);
          data = 56'({$urandom, $urandom});
          n++;
          @(negedge mclk);
          while (!in_ready) @(negedge mclk);
          in_valid = 0;
        end
      end
      begin
        // stall the link randomly during the second half
        repeat (300) @(negedge fclk);
        repeat (400) begin @(negedge fclk); f_ready = ($urandom_range(0, 2) != 0); end
        f_ready = 1;
      end
      begin
        for (int n = 1; n <= 5; n++) begin
          @(negedge mclk); r_valid = 1; r_data = 8'(n);
          @(negedge mclk); r_valid = 0;
          repeat (3) @(negedge mclk);
        end
      end
    join
    repeat (400) @(negedge fclk);
    checks++;
    if (exp_flits.size() != 0) begin failures++; $display("FAIL %0d flits never came", exp_flits.size()); end
    checks++;
    if (gaps != 0) begin failures++; $display("FAIL %0d idle flit slots inside packets", gaps); end
    checks++;
    if (res_flits != 15) begin failures++; $display("FAIL result NA sent %0d flits", res_flits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
