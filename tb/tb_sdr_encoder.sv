// tb_sdr_encoder: feeds groups every clock (including the two example groups
// of the paper's figures) and compares each registered output group (codes,
// flag, masks) one clock later with a reference razoring written with
// integer arithmetic.
module tb_sdr_encoder;
  import qrazor_pkg::*;
  localparam int G = 4, BW = 16, MAG_W = BW - 1;
  int checks = 0, failures = 0, n_ovf = 0, n_up = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [G-1:0] in_sign;
  logic [G-1:0][BW-2:0] in_mag;
  logic out_valid;
  sdr_code_t [G-1:0] out_code;
  logic [FLAG_W-1:0] out_flag;
  logic [G-1:0] out_ovf_mask, out_up_mask;
  sdr_encoder #(.G(G), .BW(BW)) dut (.*);
  always #5 clk = ~clk;

  sdr_code_t [G-1:0] exp_code;
  int exp_flag;
  logic exp_valid;
  logic [G-1:0] exp_ovf;

  task automatic model(input logic [G-1:0] sg, input logic [G-1:0][BW-2:0] mg);
    int mx, p, f, fl, r;
    mx = 0;
    for (int i = 0; i < G; i++) if (int'(mg[i]) > mx) mx = int'(mg[i]);
    p = 0;
    for (int b = 0; b < MAG_W; b++) if (mx >= (1 << b)) p = b;
    f = (p >= 2) ? p - 2 : 0;
    exp_flag = f;
    for (int i = 0; i < G; i++) begin
      fl = int'(mg[i]) >> f;
      r  = (f > 0) ? ((int'(mg[i]) >> (f - 1)) & 1) : 0;
      exp_ovf[i] = (r == 1 && fl == 7);
      if (r == 1 && fl != 7) fl++;
      exp_code[i] = '{sign: sg[i], mag: 3'(fl)};
    end
  endtask

  task automatic drive(input logic [G-1:0] sg, input logic [G-1:0][BW-2:0] mg, input logic v);
    in_valid <= v; in_sign <= sg; in_mag <= mg;
    @(posedge clk);
    #1;
    checks++;
    if (out_valid !== v) begin failures++; $display("FAIL valid"); end
    if (v) begin
      model(sg, mg);
      checks++;
      if (out_code !== exp_code || int'(out_flag) != exp_flag || out_ovf_mask !== exp_ovf) begin
        failures++; $display("FAIL code=%h exp=%h flag=%0d exp=%0d", out_code, exp_code, out_flag, exp_flag);
      end
      n_ovf += $countones(out_ovf_mask); n_up += $countones(out_up_mask);
    end
  endtask

  initial begin
    in_valid = 0; in_sign = '0; in_mag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Fig. 4 group: expected 0111 0001 1010 0010, flag 0111
    drive(4'b0100, {15'b000000100011100, 15'b000000011101110,
                    15'b000000010110100, 15'b000001111101100}, 1'b1);
    checks++;
    if (out_code !== {4'b0010, 4'b1010, 4'b0001, 4'b0111} || out_flag !== 4'b0111) begin
      failures++; $display("FAIL fig4 %h %h", out_code, out_flag);
    end
    drive('0, '0, 1'b0);
    for (int t = 0; t < 3000; t++) begin
      logic [G-1:0][BW-2:0] mg; int sh;
      sh = $urandom_range(0, 15);
      for (int i = 0; i < G; i++) mg[i] = MAG_W'($urandom) >> sh;
      drive(G'($urandom), mg, ($urandom_range(0, 7) != 0));
    end
    checks++;
    if (n_ovf == 0 || n_up == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
