// tb_fp16_quantizer: checks q = round(x * scale) in sign-magnitude form, with
// rounding half away from zero and saturation, for INT16 and INT8 outputs.
// The reference works in double precision, where the FP16 x FP16 product is
// exact.
module tb_fp16_quantizer;
  import qrazor_pkg::*;
  int checks = 0, failures = 0, n_sat = 0;
  fp16_t x, scale;
  logic s16; logic [14:0] m16; logic sat16;
  logic s8;  logic [6:0]  m8;  logic sat8;
  fp16_quantizer #(.BW(16)) dut16 (.x(x), .scale(scale), .q_sign(s16), .q_mag(m16), .sat(sat16));
  fp16_quantizer #(.BW(8))  dut8  (.x(x), .scale(scale), .q_sign(s8),  .q_mag(m8),  .sat(sat8));

  function automatic real f2r(input fp16_t h);
    int e; real m;
    e = int'(h[14:10]);
    m = real'(h[9:0]);
    if (e == 0) return (h[15] ? -1.0 : 1.0) * m * (2.0 ** -24);
    return (h[15] ? -1.0 : 1.0) * (1024.0 + m) * (2.0 ** (e - 25));
  endfunction

  task automatic check_one(input int bw, input logic s, input int m, input logic sat);
    real p, a; int qmax, em; bit es, esat;
    qmax = (1 << (bw - 1)) - 1;
    p = f2r(x) * f2r(scale);
    a = (p < 0) ? -p : p;
    esat = 0;
    if ($floor(a + 0.5) > real'(qmax)) begin em = qmax; esat = 1; end
    else em = int'($floor(a + 0.5));
    es = (p < 0) && (em != 0);
    checks++;
    if (m != em || s !== es || sat !== esat) begin
      failures++;
      $display("FAIL bw=%0d x=%h s=%h q=%0d%0d exp=%0d%0d sat=%b", bw, x, scale, s, m, es, em, sat);
    end
  endtask

  initial begin
    // 127/|Xmax| style scale, e.g. 2.0 (0x4000), and values around it
    for (int t = 0; t < 20000; t++) begin
      x = fp16_t'($urandom);
      if (x[14:10] == 5'h1f) x[14:10] = 5'h1e;           // finite inputs
      scale = {1'b0, 5'($urandom_range(1, 22)), 10'($urandom)};
      #1;
      check_one(16, s16, int'(m16), sat16);
      check_one(8,  s8,  int'(m8),  sat8);
      n_sat += sat16;
    end
    // exact half: 2.5 * 1.0 -> 3 (away from zero); -2.5 -> -3
    x = 16'h4100; scale = 16'h3c00; #1; checks++;
    if (m16 != 15'd3 || s16) begin failures++; $display("FAIL half"); end
    x = 16'hc100; #1; checks++;
    if (m16 != 15'd3 || !s16) begin failures++; $display("FAIL -half"); end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL no saturation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
