// tb_sdr_round: checks truncation and rounding of one magnitude: round half up
// on the first cut bit, except that a value whose salient bits are all ones is
// floored (overflow protection). Reference uses integer division.
module tb_sdr_round;
  import qrazor_pkg::*;
  localparam int MAG_W = 15;
  int checks = 0, failures = 0, n_up = 0, n_ovf = 0;
  logic [MAG_W-1:0] mag; logic [FLAG_W-1:0] flag;
  logic [SAL_W-1:0] q; logic rounded_up, ovf_protect;
  sdr_round #(.MAG_W(MAG_W)) dut (.*);

  task automatic check();
    int f, m, fl, r, e; bit eu, eo;
    f = int'(flag); m = int'(mag);
    fl = m / (1 << f);
    r  = (f > 0) ? ((m % (1 << f)) >= (1 << (f - 1))) : 0;
    eu = 0; eo = 0; e = fl;
    if (r && fl == 7) eo = 1;
    else if (r) begin e = fl + 1; eu = 1; end
    checks++;
    if (int'(q) != e || rounded_up !== eu || ovf_protect !== eo) begin
      failures++; $display("FAIL mag=%0d flag=%0d q=%0d exp=%0d", m, f, q, e);
    end
    n_up += eu; n_ovf += eo;
  endtask

  initial begin
    // Fig. 4 rows with flag 7: 0111 (protected), 0001, 1010, 0010
    flag = 4'd7;
    mag = 15'b000001111101100; #1 check();
    if (q !== 3'b111 || !ovf_protect) begin failures++; $display("FAIL fig4 row1"); end
    mag = 15'b000000010110100; #1 check();
    if (q !== 3'b001) begin failures++; $display("FAIL fig4 row2"); end
    mag = 15'b000000011101110; #1 check();
    if (q !== 3'b010) begin failures++; $display("FAIL fig4 row3"); end
    mag = 15'b000000100011100; #1 check();
    if (q !== 3'b010) begin failures++; $display("FAIL fig4 row4"); end
    // Fig. 3: weight magnitude 0010111, flag 2 -> 110; activation, flag 8 -> 101
    flag = 4'd2; mag = 15'b000000000010111; #1 check();
    if (q !== 3'b110) begin failures++; $display("FAIL fig3 w"); end
    flag = 4'd8; mag = 15'b000010101000110; #1 check();
    if (q !== 3'b101) begin failures++; $display("FAIL fig3 a"); end
    checks += 6;
    for (int t = 0; t < 5000; t++) begin
      flag = FLAG_W'($urandom_range(0, 12));
      mag  = MAG_W'($urandom_range(0, (8 << flag) - 1));
      #1 check();
    end
    checks++;
    if (n_up == 0 || n_ovf == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
