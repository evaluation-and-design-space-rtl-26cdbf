// tb_adaptor_tdm: with packets always waiting and no stall, 'load' must pulse
// once every Nb_flit cycles (the TDM packet rate), for Nb_flit = 9, 8 and 3;
// with random stalls, the number of accepted flits between two loads must
// still equal Nb_flit, and first/last must mark the first and last of them.
module tb_adaptor_tdm;
  logic clk = 0, rst_n = 0, pkt_avail = 0, advance = 0;
  logic [7:0] nb_flit = 8'd9, slot;
  logic load, busy, first, last;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  adaptor_tdm dut (.clk, .rst_n, .pkt_avail, .nb_flit, .advance, .load, .busy, .first, .last, .slot);
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    static int nbs[3] = '{9, 8, 3};
    #17 rst_n = 1;
    foreach (nbs[t]) begin
      int last_load, cyc, cnt;
      nb_flit = 8'(nbs[t]);
      // no stall: advance whenever busy
      last_load = -1; cyc = 0; cnt = 0;
      pkt_avail = 1;
      while (cnt < 6) begin
        @(negedge clk);
        advance = busy;
        #1;
        if (load) begin
          if (last_load >= 0) begin
            checks++;
            if (cyc - last_load != nbs[t]) begin failures++; $display("FAIL period %0d for nb %0d", cyc - last_load, nbs[t]); end
          end
          last_load = cyc; cnt++;
        end
        cyc++;
      end
      // random stalls: count accepted flits between loads
      cnt = 0;
      begin
        static int flits = -1, loads = 0;
        while (loads < 6) begin
          @(negedge clk);
          advance = busy && ($urandom_range(0, 2) != 0);
          #1;
          if (advance && flits >= 0) begin
            checks++;
            if (first != (flits == 0) || last != (flits == nbs[t] - 1)) begin
              failures++; $display("FAIL first/last at flit %0d", flits);
            end
          end
          if (advance && flits >= 0) flits++;
          if (load) begin
            if (flits > 0) begin
              checks++;
              if (flits != nbs[t]) begin failures++; $display("FAIL %0d flits between loads, nb %0d", flits, nbs[t]); end
            end
            flits = 0; loads++;
            if (advance) flits = 0;
          end
        end
      end
      // let the current packet finish before changing nb_flit
      pkt_avail = 0;
      while (busy) begin @(negedge clk); advance = 1; end
      advance = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
