// tb_sdr_razor_point: checks the group bitwise OR, the leading-one position
// and the flag (= number of truncated LSBs) against a reference computed by
// comparing the group maximum with powers of two.
module tb_sdr_razor_point;
  import qrazor_pkg::*;
  localparam int G = 4, MAG_W = 15;
  int checks = 0, failures = 0;
  logic [G-1:0][MAG_W-1:0] mag;
  logic [MAG_W-1:0] or_bits; logic [FLAG_W-1:0] flag; logic [4:0] lead; logic any_one;
  sdr_razor_point #(.G(G), .MAG_W(MAG_W)) dut (.*);

  task automatic check(input int exp_flag, input string what);
    int mx, p, ef; logic [MAG_W-1:0] eor;
    mx = 0; eor = '0;
    for (int i = 0; i < G; i++) begin
      if (int'(mag[i]) > mx) mx = int'(mag[i]);
      eor |= mag[i];
    end
    p = 0;
    for (int b = 0; b < MAG_W; b++) if (mx >= (1 << b)) p = b;
    ef = (p >= SAL_W - 1) ? p - (SAL_W - 1) : 0;
    if (exp_flag >= 0) ef = exp_flag;
    checks++;
    if (int'(flag) != ef || or_bits !== eor || (mx != 0 && int'(lead) != p) || any_one !== (mx != 0)) begin
      failures++; $display("FAIL %s flag=%0d exp=%0d lead=%0d", what, flag, ef, lead);
    end
  endtask

  initial begin
    // Fig. 4 group: OR = 00000 1111111110, leading one at bit 9, flag 0111
    mag[0] = 15'b000001111101100;
    mag[1] = 15'b000000010110100;
    mag[2] = 15'b000000011101110;
    mag[3] = 15'b000000100011100;
    #1 check(7, "fig4");
    if (or_bits !== 15'b000001111111110) begin failures++; $display("FAIL fig4 OR"); end
    checks++;
    mag = '0; #1 check(0, "zero");
    mag[2] = 15'd3; #1 check(0, "small");
    mag[1] = 15'h4000; #1 check(12, "max");
    for (int t = 0; t < 3000; t++) begin
      int sh; sh = $urandom_range(0, 15);
      for (int i = 0; i < G; i++) mag[i] = MAG_W'($urandom) >> sh;
      #1 check(-1, "rand");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
