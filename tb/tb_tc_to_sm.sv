// tb_tc_to_sm: exhaustive check of the two's-complement to sign-magnitude
// converter at 8 bits (weights, KV cache) and random checks at 16 bits.
module tb_tc_to_sm;
  int checks = 0, failures = 0;
  logic [7:0]  x8;  logic s8;  logic [6:0]  m8;
  logic [15:0] x16; logic s16; logic [14:0] m16;
  tc_to_sm #(.BW(8))  dut8  (.x(x8),  .sign(s8),  .mag(m8));
  tc_to_sm #(.BW(16)) dut16 (.x(x16), .sign(s16), .mag(m16));

  function automatic int expmag(input int v, input int bw);
    int a; a = (v < 0) ? -v : v;
    if (a > (1 << (bw-1)) - 1) a = (1 << (bw-1)) - 1;
    return a;
  endfunction

  initial begin
    for (int v = -128; v < 128; v++) begin
      x8 = 8'(v); #1;
      checks++;
      if (s8 !== (v < 0) || int'(m8) != expmag(v, 8)) begin
        failures++; $display("FAIL 8b v=%0d sign=%b mag=%0d", v, s8, m8);
      end
    end
    // Fig. 3 example: 11101001 -> 1 0010111
    x8 = 8'b11101001; #1; checks++;
    if ({s8, m8} !== 8'b10010111) begin failures++; $display("FAIL fig3 weight"); end
    // Fig. 3 example: 1111101010111010 -> 1 000010101000110
    x16 = 16'b1111101010111010; #1; checks++;
    if ({s16, m16} !== 16'b1000010101000110) begin failures++; $display("FAIL fig3 act"); end
    for (int i = 0; i < 2000; i++) begin
      int v; v = int'($signed(16'($urandom)));
      x16 = 16'(v); #1; checks++;
      if (s16 !== (v < 0) || int'(m16) != expmag(v, 16)) begin
        failures++; $display("FAIL 16b v=%0d", v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
