// tb_qrazor_mac: checks the decompression-free MAC against a MAC on the
// decompressed integers ((-1)^s * mag << flag), which must give the same sum.
// Includes the worked example of the paper (0110 x 0101 with flags 2 and 8)
// and checks the one-clock update latency.
module tb_qrazor_mac;
  import qrazor_pkg::*;
  localparam int ACC_W = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en, clr;
  sdr_code_t w_code, a_code;
  logic [FLAG_W-1:0] w_flag, a_flag;
  logic signed [ACC_W-1:0] acc;
  qrazor_mac #(.MAX_SHIFT(16), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  longint ref_acc;

  function automatic longint decomp(input sdr_code_t c, input int f);
    longint v; v = longint'(c.mag) <<< f;
    return c.sign ? -v : v;
  endfunction

  initial begin
    en = 0; clr = 0; w_code = '0; a_code = '0; w_flag = '0; a_flag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // paper example: weight 1110 flag 2, activation 1101 flag 8 -> +30 << 10
    @(negedge clk);
    en = 1; clr = 1; w_code = 4'b1110; w_flag = 4'd2; a_code = 4'b1101; a_flag = 4'd8;
    #1; checks++;
    if (acc != 0) begin failures++; $display("FAIL acc changed before clock"); end
    @(negedge clk);
    checks++;
    if (acc != 40'sd30720) begin failures++; $display("FAIL fig3 acc=%0d", acc); end
    ref_acc = 30720;
    clr = 0;
    for (int t = 0; t < 5000; t++) begin
      int wf, af;
      en = ($urandom_range(0, 3) != 0);
      clr = ($urandom_range(0, 200) == 0);
      w_code = 4'($urandom); a_code = 4'($urandom);
      wf = $urandom_range(0, 4); af = $urandom_range(0, 12);
      w_flag = 4'(wf); a_flag = 4'(af);
      if (en) ref_acc = (clr ? 0 : ref_acc) + decomp(w_code, wf) * decomp(a_code, af);
      else if (clr) ref_acc = 0;
      @(negedge clk);
      checks++;
      if (longint'(acc) != ref_acc) begin
        failures++; $display("FAIL t=%0d acc=%0d ref=%0d", t, acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
