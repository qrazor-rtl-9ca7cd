// tb_acc_dequant: checks y = acc * scale rounded to FP16 for a 40-bit signed
// accumulator. The reference forms the exact product in double precision
// (below 2^53, so exact) and requires the result to be within half a unit
// in the last place, with ties going to the even significand. Accumulator
// lengths and scale exponents are drawn so that the results cover
// subnormal, normal and overflowing FP16 values. The corner cases are 0, +1,
// -1 and -2^39.
module tb_acc_dequant;
  import qrazor_pkg::*;
  localparam int ACC_W = 40;
  int checks = 0, failures = 0;
  int n_sub = 0, n_norm = 0, n_inf = 0;
  logic signed [ACC_W-1:0] acc; fp16_t scale, y;
  acc_dequant #(.ACC_W(ACC_W)) dut (.*);

  function automatic real p2(input int k);
    real r; r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real f2r(input fp16_t h);
    int e; real m;
    e = int'(h[14:10]); m = real'(h[9:0]);
    if (e == 0) return (h[15] ? -1.0 : 1.0) * m * p2(-24);
    return (h[15] ? -1.0 : 1.0) * (1024.0 + m) * p2(e - 25);
  endfunction

  task automatic check();
    real ex, ax, ay, ulp, err; int k;
    ex = real'(acc) * f2r(scale);
    ax = (ex < 0) ? -ex : ex;
    k = -14;
    while (p2(k + 1) <= ax && k < 15) k++;
    ulp = p2(k - 10);
    checks++;
    if (ax >= 65520.0) begin
      n_inf++;
      if (y[14:0] != 15'h7c00 || y[15] != (ex < 0)) begin
        failures++; $display("FAIL inf acc=%0d scale=%h y=%h", acc, scale, y);
      end
      return;
    end
    if (ax < p2(-14)) n_sub++; else n_norm++;
    ay = f2r(y); ay = (ay < 0) ? -ay : ay;
    err = ay - ax; if (err < 0) err = -err;
    if (err > ulp / 2.0 || (err == ulp / 2.0 && y[0]) ||
        (ax != 0.0 && (y[15] != (ex < 0)))) begin
      failures++; $display("FAIL acc=%0d scale=%h y=%h exact=%g", acc, scale, y, ex);
    end
  endtask

  initial begin
    int len, tgt, es;
    scale = 16'h3c00;
    acc = 0;  #1 check();
    checks++; if (y[14:0] != 15'd0) begin failures++; $display("FAIL zero %h", y); end
    acc = 1;  #1 check();
    checks++; if (y != 16'h3c00) begin failures++; $display("FAIL one %h", y); end
    acc = -1; #1 check();
    checks++; if (y != 16'hbc00) begin failures++; $display("FAIL minus one %h", y); end
    // 30720 (the weight x activation example of the MAC) times 2^-10 = 30
    acc = 30720; scale = 16'h1400; #1 check();
    checks++; if (y != 16'h4f80) begin failures++; $display("FAIL 30 %h", y); end
    acc = {1'b1, {(ACC_W-1){1'b0}}}; scale = 16'h0400; #1 check();
    for (int t = 0; t < 20000; t++) begin
      len = $urandom_range(0, ACC_W - 1);
      acc = ACC_W'({$urandom, $urandom}) & ((ACC_W'(1) << len) - 1'b1);
      acc = acc | (ACC_W'(1) << len) >> 1;
      if ($urandom_range(0, 1) == 1) acc = -acc;
      tgt = int'($urandom_range(0, 44)) - 27;
      es  = tgt - len + 15 + int'($urandom_range(0, 2));
      if (es < 0) es = 0;
      if (es > 30) es = 30;
      scale = {1'b0, 5'(es), 10'($urandom)};
      #1 check();
    end
    checks++;
    if (n_sub == 0 || n_norm == 0 || n_inf == 0) begin
      failures++; $display("FAIL coverage sub=%0d norm=%0d inf=%0d", n_sub, n_norm, n_inf);
    end
    $display("coverage: subnormal %0d, normal %0d, overflow %0d", n_sub, n_norm, n_inf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
