// tb_adaptor_flit: loads random 72-bit packets and checks that the flits come
// out most significant byte first, one per advance, that a stall (no advance)
// holds the flit, and that a load in the cycle of the last flit starts the
// next packet. A 16-bit-flit instance with a 24-bit packet checks the zero
// padding of the last flit.
module tb_adaptor_flit;
  logic clk = 0, rst_n = 0, load = 0, advance = 0, load2 = 0, adv2 = 0;
  logic [71:0] pkt = '0;
  logic [23:0] pkt2 = '0;
  logic [7:0]  flit;
  logic [15:0] flit2;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  adaptor_flit #(.PKT_W(72), .FLIT_W(8)) dut (.clk, .rst_n, .load, .data_pack(pkt), .advance, .flit);
  adaptor_flit #(.PKT_W(24), .FLIT_W(16)) dut2 (.clk, .rst_n, .load(load2), .data_pack(pkt2), .advance(adv2), .flit(flit2));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [71:0] cur;
    #17 rst_n = 1;
    cur = 72'({$urandom, $urandom, $urandom});
    @(negedge clk); pkt = cur; load = 1;
    @(negedge clk); load = 0;
    for (int n = 0; n < 20; n++) begin
      for (int f = 0; f < 9; f++) begin
        // random stall cycles
        while ($urandom_range(0, 2) == 0) begin
          advance = 0; @(negedge clk);
          checks++;
          if (flit != cur[71 - 8*f -: 8]) begin failures++; $display("FAIL stall flit %0d", f); end
        end
        checks++;
        if (flit != cur[71 - 8*f -: 8]) begin failures++; $display("FAIL pkt %0d flit %0d: %h vs %h", n, f, flit, cur[71-8*f -: 8]); end
        advance = 1;
        if (f == 8) begin cur = 72'({$urandom, $urandom, $urandom}); pkt = cur; load = 1; end
        @(negedge clk);
        advance = 0; load = 0;
      end
    end
    pkt2 = 24'hC3_5A_FF;
    @(negedge clk); load2 = 1; @(negedge clk); load2 = 0;
    checks++; if (flit2 != 16'hC35A) begin failures++; $display("FAIL 16-bit flit 0 %h", flit2); end
    adv2 = 1; @(negedge clk); adv2 = 0;
    checks++; if (flit2 != 16'hFF00) begin failures++; $display("FAIL 16-bit flit 1 %h", flit2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
