// tb_sdr_dequant: checks y = (-1)^s * (mag << flag) * scale in FP16. The
// reference takes the exact product in double precision and requires the
// result to be within half a unit in the last place, with ties going to the
// even significand.
module tb_sdr_dequant;
  import qrazor_pkg::*;
  int checks = 0, failures = 0;
  sdr_code_t code; logic [FLAG_W-1:0] flag; fp16_t scale, y;
  sdr_dequant dut (.*);

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
    ex = (code.sign ? -1.0 : 1.0) * real'(code.mag) * p2(int'(flag)) * f2r(scale);
    ax = (ex < 0) ? -ex : ex;
    k = -14;
    while (p2(k + 1) <= ax && k < 15) k++;
    ulp = p2(k - 10);
    checks++;
    if (ax >= 65520.0) begin
      if (y[14:0] != 15'h7c00) begin failures++; $display("FAIL inf %h", y); end
      return;
    end
    ay = f2r(y); ay = (ay < 0) ? -ay : ay;
    err = ay - ax; if (err < 0) err = -err;
    if (err > ulp / 2.0 || (err == ulp / 2.0 && y[0]) ||
        (ax != 0.0 && (y[15] != (ex < 0)))) begin
      failures++; $display("FAIL code=%h flag=%0d scale=%h y=%h exact=%g", code, flag, scale, y, ex);
    end
  endtask

  initial begin
    // paper example: activation code 1101, flag 8 -> -1280 before scaling
    code = 4'b1101; flag = 4'd8; scale = 16'h3c00; #1 check();
    checks++;
    if (y !== 16'he500) begin failures++; $display("FAIL -1280 got %h", y); end
    for (int t = 0; t < 20000; t++) begin
      code = 4'($urandom); flag = 4'($urandom_range(0, 12));
      scale = {1'b0, 5'($urandom_range(0, 30)), 10'($urandom)};
      #1 check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
