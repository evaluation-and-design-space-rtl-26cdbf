// tb_adaptor_type: checks the flit count of every data type for 8-bit flits
// (72/64/64/24-bit packets give 9/8/8/3 flits) and for 16- and 64-bit flits.
module tb_adaptor_type;
  logic [1:0] id;
  logic [7:0] nb8, nb16, nb64;
  int checks = 0, failures = 0;
  adaptor_type #(.FLIT_W(8))  u8  (.id, .nb_flit(nb8));
  adaptor_type #(.FLIT_W(16)) u16 (.id, .nb_flit(nb16));
  adaptor_type #(.FLIT_W(64)) u64 (.id, .nb_flit(nb64));
  initial begin #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    static int exp8[4]  = '{9, 8, 8, 3};
    static int exp16[4] = '{5, 4, 4, 2};
    static int exp64[4] = '{2, 1, 1, 1};
    for (int i = 0; i < 4; i++) begin
      id = 2'(i); #1;
      checks += 3;
      if (nb8 != 8'(exp8[i]))   begin failures++; $display("FAIL id %0d 8-bit: %0d", i, nb8); end
      if (nb16 != 8'(exp16[i])) begin failures++; $display("FAIL id %0d 16-bit: %0d", i, nb16); end
      if (nb64 != 8'(exp64[i])) begin failures++; $display("FAIL id %0d 64-bit: %0d", i, nb64); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
