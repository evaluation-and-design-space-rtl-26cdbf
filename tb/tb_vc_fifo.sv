// tb_vc_fifo: self-checking test of the bi-synchronous FIFO.
// Write side at 10 ns, read side at 7 ns. Phase 1 fills the FIFO without
// reading and checks that exactly DEPTH words are accepted and that full is
// raised; phase 2 drains it and checks order and empty; phase 3 streams
// random traffic with random write and read enables against a queue model.
// Also checks that a word written into an empty FIFO becomes readable
// within SYNC_STAGES+2 read clocks, and that wr_empty returns once all is read.
module tb_vc_fifo;
  localparam int W = 8, D = 32;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, rd_en = 0, wr_full, wr_empty, rd_empty;
  logic [W-1:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  always #5 wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  vc_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en, .wr_data, .wr_full, .wr_empty,
    .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en, .rd_data, .rd_empty);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int accepted, n, lat;
    #22 wrst_n = 1; rrst_n = 1;
    @(posedge wclk);
    check(rd_empty && wr_empty && !wr_full, "flags after reset");
    // latency of one word
    @(negedge wclk); wr_en = 1; wr_data = 8'hA5;
    @(negedge wclk); wr_en = 0;
    lat = 0;
    while (rd_empty && lat < 20) begin @(posedge rclk); #0.1; lat++; end
    check(lat <= 2 + 2 && rd_data == 8'hA5, $sformatf("first word latency %0d rd clocks", lat));
    @(negedge rclk); rd_en = 1; @(negedge rclk); rd_en = 0;
    repeat (6) @(posedge wclk);
    check(wr_empty, "wr_empty after drain");
    // phase 1: fill
    accepted = 0;
    for (int i = 0; i < D + 5; i++) begin
      @(negedge wclk);
      wr_en = 1; wr_data = W'(i * 7 + 1);
      if (!wr_full) begin accepted++; model.push_back(wr_data); end
    end
    @(negedge wclk); wr_en = 0;
    check(accepted == D, $sformatf("accepted %0d words, expected %0d", accepted, D));
    check(wr_full, "full when DEPTH words stored");
    // phase 2: drain
    n = 0;
    while (model.size() > 0 && n < 200) begin
      @(negedge rclk);
      if (!rd_empty) begin
        check(rd_data == model[0], $sformatf("drain order %0h vs %0h", rd_data, model[0]));
        void'(model.pop_front());
        rd_en = 1;
      end else rd_en = 0;
      n++;
    end
    @(negedge rclk); rd_en = 0;
    repeat (4) @(posedge rclk);
    check(rd_empty, "empty after drain");
    // phase 3: random streaming
    fork
      begin
        for (int i = 0; i < 300; ) begin
          @(negedge wclk);
          wr_en = ($urandom_range(0, 2) != 0);
          wr_data = W'($urandom);
          if (wr_en && !wr_full) begin model.push_back(wr_data); i++; end
        end
        @(negedge wclk); wr_en = 0;
      end
      begin
        static int got = 0;
        while (got < 300) begin
          @(negedge rclk);
          rd_en = 0;
          if (!rd_empty && $urandom_range(0, 3) != 0) begin
            check(model.size() > 0 && rd_data == model[0], "stream order");
            if (model.size() > 0) void'(model.pop_front());
            rd_en = 1; got++;
          end
        end
        @(negedge rclk); rd_en = 0;
      end
    join
    repeat (6) @(posedge wclk);
    check(rd_empty && wr_empty && model.size() == 0, "all data delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
