// tb_adaptor_pack: offers words of all four types, with the downstream FIFO
// randomly full, and checks each packet written: header byte, data bits of
// the type's width, FF tail, zero fill, and that no word is lost or repeated.
module tb_adaptor_pack;
  localparam int DW = 56, PW = 72;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, fifo_full = 0, pack_wr;
  logic [1:0] id = '0, p = '0;
  logic [3:0] il = '0;
  logic [DW-1:0] data = '0;
  logic [PW-1:0] data_pack;
  logic [PW-1:0] exp_q[$];
  int checks = 0, failures = 0, sent = 0, got = 0;
  always #5 clk = ~clk;
  adaptor_pack #(.DATA_W(DW)) dut (.clk, .rst_n, .in_valid, .in_ready, .id, .p, .int_length(il), .data,
    .fifo_full, .pack_wr, .data_pack);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [PW-1:0] expect_pkt(logic [1:0] i, logic [1:0] pp, logic [3:0] l, logic [DW-1:0] d);
    case (i)
      2'b00: return {i, pp, l, d[55:0], 8'hFF};
      2'b01, 2'b10: return {i, pp, l, d[47:0], 8'hFF, 8'h00};
      default: return {i, pp, l, d[7:0], 8'hFF, 48'h0};
    endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (pack_wr) begin
      checks++;
      if (exp_q.size() == 0 || data_pack !== exp_q[0]) begin
        failures++; $display("FAIL packet %h expected %h", data_pack, exp_q.size() != 0 ? exp_q[0] : '0);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      got++;
    end
    if (in_valid && in_ready) begin exp_q.push_back(expect_pkt(id, p, il, data)); sent++; end
  end

  initial begin
    #17 rst_n = 1;
    while (sent < 200) begin
      @(negedge clk);
      fifo_full = ($urandom_range(0, 3) == 0);
      if (!in_valid || in_ready) begin
        // a new word only after the previous one was taken
      end
      if (in_valid && !in_ready) continue;
      in_valid = ($urandom_range(0, 4) != 0);
      id = 2'($urandom); p = 2'($urandom); il = 4'($urandom);
      data = DW'({$urandom, $urandom});
    end
    @(negedge clk); in_valid = 0; fifo_full = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
