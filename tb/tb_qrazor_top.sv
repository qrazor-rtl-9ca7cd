// tb_qrazor_top: end-to-end test of the QRazor tile at its default size
// (G=16, 8x8 MACs, 1024 groups per bank).
//
// Loads INT8 weights, FP16 activations and FP16 keys through the on-chip
// quantize+compress paths, runs projection GEMMs (weights) and Q*K^T GEMMs
// (KV cache) of several lengths up to the full 1024 groups (K = 16384), and
// reads cached groups back through the De-QR port. After a run, every
// accumulator row is also read back as FP16 through the readout port. Every accumulator is
// compared with a reference that quantizes in double precision, razors with
// integer arithmetic and accumulates the decompressed integers; the GEMM
// latency (n*G clocks after the edge that takes start) and the De-QR latency are checked too. It also
// counts how often each mechanism occurred (quantizer saturation, rounding
// up, overflow protection, groups left untruncated, negative products, both
// operand modes, De-QR reads, FP16 readouts) and fails if one never did.
module tb_qrazor_top;
  import qrazor_pkg::*;
  localparam int G = 16, ROWS = 8, COLS = 8, DEPTH = 1024, ACC_W = 40;
  localparam int AW = 10, RW = 3, CW = 3;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_valid; logic [CW-1:0] w_col; logic [AW-1:0] w_grp; logic [G-1:0][7:0] w_data;
  logic a_valid; logic [RW-1:0] a_row; logic [AW-1:0] a_grp; fp16_t [G-1:0] a_data; fp16_t a_scale;
  logic kv_valid; logic [CW-1:0] kv_tok; logic [AW-1:0] kv_grp; fp16_t [G-1:0] kv_data; fp16_t kv_scale;
  logic start, mode; logic [AW:0] n_groups; logic busy, done;
  logic signed [ACC_W-1:0] acc [ROWS][COLS];
  logic dq_req; logic [CW-1:0] dq_tok; logic [AW-1:0] dq_grp; fp16_t dq_scale;
  logic dq_valid; fp16_t [G-1:0] dq_data;
  logic oq_req; logic [RW-1:0] oq_row; fp16_t oq_scale;
  logic oq_valid; fp16_t [COLS-1:0] oq_data;
  logic [7:0] mon_sat, mon_ovf, mon_up;

  qrazor_top dut (.*);

  // reference copies of the compressed memories: value of each element after
  // decompression, and the codes/flags
  longint ref_w  [COLS][DEPTH][G];
  longint ref_a  [ROWS][DEPTH][G];
  longint ref_kv [COLS][DEPTH][G];
  sdr_code_t kv_code [COLS][DEPTH][G];
  int        kv_flag [COLS][DEPTH];

  int n_sat = 0, n_ovf = 0, n_mup = 0, n_up = 0, n_flag0 = 0, n_neg = 0, n_mode0 = 0, n_mode1 = 0, n_dq = 0,
      n_oq = 0, n_oq_inf = 0;
  longint exp_acc [ROWS][COLS];

  function automatic real f2r(input fp16_t h);
    int e; real m;
    e = int'(h[14:10]); m = real'(h[9:0]);
    if (e == 0) return (h[15] ? -1.0 : 1.0) * m * (2.0 ** -24);
    return (h[15] ? -1.0 : 1.0) * (1024.0 + m) * (2.0 ** (e - 25));
  endfunction

  // quantize: signed integer round(x*s), half away from zero, saturated
  function automatic int quant(input fp16_t x, input fp16_t s, input int bw);
    real p, a; int qmax, m;
    qmax = (1 << (bw - 1)) - 1;
    p = f2r(x) * f2r(s); a = (p < 0) ? -p : p;
    m = ($floor(a + 0.5) > real'(qmax)) ? qmax : int'($floor(a + 0.5));
    return (p < 0) ? -m : m;
  endfunction

  // SDR razoring of one group of signed integers; returns decompressed
  // values, codes and flag
  task automatic razor(input int v [G], input int bw, output longint dv [G],
                       output sdr_code_t code [G], output int flag);
    int mx, p, fl, r, m;
    mx = 0;
    for (int i = 0; i < G; i++) begin
      m = (v[i] < 0) ? -v[i] : v[i];
      if (m > mx) mx = m;
    end
    p = 0;
    for (int b = 0; b < bw - 1; b++) if (mx >= (1 << b)) p = b;
    flag = (p >= 2) ? p - 2 : 0;
    if (flag == 0) n_flag0++;
    for (int i = 0; i < G; i++) begin
      m  = (v[i] < 0) ? -v[i] : v[i];
      fl = m >> flag;
      r  = (flag > 0) ? ((m >> (flag - 1)) & 1) : 0;
      if (r == 1 && fl != 7) begin fl++; n_up++; end
      code[i] = '{sign: (v[i] < 0), mag: 3'(fl)};
      dv[i] = (v[i] < 0) ? -(longint'(fl) <<< flag) : (longint'(fl) <<< flag);
    end
  endtask

  // random FP16 value of magnitude below 2^emax (unbiased)
  function automatic fp16_t rnd_fp16(input int emax);
    int e; logic sg; logic [4:0] be; logic [9:0] man; logic [31:0] r;
    r   = $urandom;
    sg  = r[31];
    man = r[9:0];
    e   = $urandom_range(0, emax + 14) + 1;   // biased exponent 1 .. emax+15
    if (e > 30) e = 30;
    be  = e[4:0];
    if (r[15:12] == 4'd0) return {sg, 15'd0};
    return {sg, be, man};
  endfunction

  task automatic load_weights(input int ngrp);
    int v [G]; longint dv [G]; sdr_code_t code [G]; int flag, sh;
    for (int c = 0; c < COLS; c++)
      for (int g = 0; g < ngrp; g++) begin
        sh = $urandom_range(0, 7);
        for (int i = 0; i < G; i++) begin
          v[i] = int'($signed(8'($urandom))) >>> sh;
          w_data[i] = 8'(v[i]);
          if (v[i] == -128) v[i] = -127;
        end
        razor(v, 8, dv, code, flag);
        for (int i = 0; i < G; i++) ref_w[c][g][i] = dv[i];
        w_valid <= 1; w_col <= CW'(c); w_grp <= AW'(g);
        @(posedge clk);
        #1 n_ovf += int'(mon_ovf); n_mup += int'(mon_up);
      end
    w_valid <= 0;
  endtask

  task automatic load_acts(input int ngrp);
    int v [G]; longint dv [G]; sdr_code_t code [G]; int flag, emax;
    for (int r = 0; r < ROWS; r++)
      for (int g = 0; g < ngrp; g++) begin
        emax = int'($urandom_range(0, 18)) - 6;                    // a_scale = 8.0
        for (int i = 0; i < G; i++) begin
          a_data[i] = rnd_fp16(emax);
          v[i] = quant(a_data[i], a_scale, 16);
        end
        razor(v, 16, dv, code, flag);
        for (int i = 0; i < G; i++) ref_a[r][g][i] = dv[i];
        a_valid <= 1; a_row <= RW'(r); a_grp <= AW'(g);
        @(posedge clk);
        #1 n_sat += int'(mon_sat); n_ovf += int'(mon_ovf); n_mup += int'(mon_up);
      end
    a_valid <= 0;
  endtask

  task automatic load_kv(input int ngrp);
    int v [G]; longint dv [G]; sdr_code_t code [G]; int flag, emax;
    for (int c = 0; c < COLS; c++)
      for (int g = 0; g < ngrp; g++) begin
        emax = int'($urandom_range(0, 12)) - 4;                     // kv_scale = 1.0
        for (int i = 0; i < G; i++) begin
          kv_data[i] = rnd_fp16(emax);
          v[i] = quant(kv_data[i], kv_scale, 8);
        end
        razor(v, 8, dv, code, flag);
        for (int i = 0; i < G; i++) begin
          ref_kv[c][g][i] = dv[i]; kv_code[c][g][i] = code[i];
        end
        kv_flag[c][g] = flag;
        kv_valid <= 1; kv_tok <= CW'(c); kv_grp <= AW'(g);
        @(posedge clk);
        #1 n_sat += int'(mon_sat); n_ovf += int'(mon_ovf); n_mup += int'(mon_up);
      end
    kv_valid <= 0;
  endtask

  task automatic run_gemm(input int ngrp, input logic md);
    int cyc; longint expv;
    repeat (2) begin                    // let the last writes land
      @(posedge clk);
      #1 n_sat += int'(mon_sat); n_ovf += int'(mon_ovf); n_mup += int'(mon_up);
    end
    start <= 1; mode <= md; n_groups <= (AW+1)'(ngrp);
    @(posedge clk);
    start <= 0;
    cyc = 0;
    do begin @(posedge clk); cyc++; #1; end while (!done && cyc < 100000);
    checks++;
    if (cyc != ngrp * G) begin failures++; $display("FAIL latency %0d exp %0d", cyc, ngrp * G); end
    if (md) n_mode1++; else n_mode0++;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        expv = 0;
        for (int g = 0; g < ngrp; g++)
          for (int i = 0; i < G; i++) begin
            longint b, p;
            b = md ? ref_kv[c][g][i] : ref_w[c][g][i];
            p = ref_a[r][g][i] * b;
            if (p < 0) n_neg++;
            expv += p;
          end
        exp_acc[r][c] = expv;
        checks++;
        if (longint'(acc[r][c]) != expv) begin
          failures++; $display("FAIL mode=%0d n=%0d acc[%0d][%0d]=%0d exp=%0d", md, ngrp, r, c, acc[r][c], expv);
        end
      end
  endtask

  // reads every accumulator row back as FP16 and compares it with the exact
  // product of the expected sum and the scale (half an ulp, ties to even)
  task automatic check_oq();
    real ex, ax, ay, ulp, err; int k;
    for (int r = 0; r < ROWS; r++) begin
      oq_req <= 1; oq_row <= RW'(r);
      oq_scale <= {1'b0, 5'($urandom_range(0, 14)), 10'($urandom)};
      @(posedge clk); oq_req <= 0;
      #1;
      checks++;
      if (!oq_valid) begin failures++; $display("FAIL oq_valid"); end
      n_oq++;
      for (int c = 0; c < COLS; c++) begin
        ex = real'(exp_acc[r][c]) * f2r(oq_scale);
        ax = (ex < 0) ? -ex : ex;
        k = -14;
        while ((2.0 ** (k + 1)) <= ax && k < 15) k++;
        ulp = 2.0 ** (k - 10);
        checks++;
        if (ax >= 65520.0) begin
          n_oq_inf++;
          if (oq_data[c][14:0] != 15'h7c00) begin
            failures++; $display("FAIL oq inf row=%0d col=%0d y=%h", r, c, oq_data[c]);
          end
        end else begin
          ay = f2r(oq_data[c]); ay = (ay < 0) ? -ay : ay;
          err = ay - ax; if (err < 0) err = -err;
          if (err > ulp / 2.0 || (err == ulp / 2.0 && oq_data[c][0]) ||
              (ax != 0.0 && oq_data[c][15] != (ex < 0))) begin
            failures++; $display("FAIL oq row=%0d col=%0d y=%h exact=%g", r, c, oq_data[c], ex);
          end
        end
      end
    end
  endtask

  task automatic check_dq(input int c, input int g);
    real ex, ax, ay, ulp, err; int k;
    dq_req <= 1; dq_tok <= CW'(c); dq_grp <= AW'(g); dq_scale <= kv_scale;
    @(posedge clk); dq_req <= 0;
    @(posedge clk); #1;
    checks++;
    if (!dq_valid) begin failures++; $display("FAIL dq_valid"); end
    n_dq++;
    for (int i = 0; i < G; i++) begin
      ex = real'(ref_kv[c][g][i]) * f2r(kv_scale);
      ax = (ex < 0) ? -ex : ex;
      k = -14;
      while ((2.0 ** (k + 1)) <= ax && k < 15) k++;
      ulp = 2.0 ** (k - 10);
      ay = f2r(dq_data[i]);
      err = ay - ex; if (err < 0) err = -err;
      checks++;
      if (err > ulp / 2.0) begin
        failures++; $display("FAIL dq tok=%0d grp=%0d i=%0d y=%h exact=%g", c, g, i, dq_data[i], ex);
      end
    end
  endtask

  initial begin
    w_valid = 0; a_valid = 0; kv_valid = 0; start = 0; mode = 0; dq_req = 0;
    oq_req = 0; oq_row = '0; oq_scale = 16'h3c00;
    w_col = '0; w_grp = '0; w_data = '0; a_row = '0; a_grp = '0; a_data = '0;
    kv_tok = '0; kv_grp = '0; kv_data = '0; n_groups = '0; dq_tok = '0; dq_grp = '0;
    a_scale = 16'h4800;    // 8.0
    kv_scale = 16'h3c00;   // 1.0
    dq_scale = 16'h3c00;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // short runs first
    load_weights(3); load_acts(3); load_kv(3);
    run_gemm(1, 0);
    run_gemm(3, 0);
    run_gemm(3, 1);
    check_oq();
    for (int c = 0; c < COLS; c++) check_dq(c, $urandom_range(0, 2));
    // one complete operation at full depth: K = 1024 groups * 16 = 16384
    load_weights(DEPTH); load_acts(DEPTH); load_kv(DEPTH);
    run_gemm(DEPTH, 0);
    run_gemm(DEPTH, 1);
    check_oq();
    run_gemm(5, 0);
    for (int t = 0; t < 16; t++) check_dq($urandom_range(0, COLS - 1), $urandom_range(0, DEPTH - 1));

    $display("mechanisms: sat=%0d round_up=%0d ovf_protect=%0d flag0_groups=%0d neg_products=%0d mode0=%0d mode1=%0d deqr=%0d acc_to_fp16=%0d (inf %0d)",
             n_sat, n_up, n_ovf, n_flag0, n_neg, n_mode0, n_mode1, n_dq, n_oq, n_oq_inf);
    checks++; if (n_sat == 0)   begin failures++; $display("FAIL no saturation"); end
    checks++; if (n_up == 0)    begin failures++; $display("FAIL no round-up"); end
    // the tile's round-up monitor must count what the reference model saw
    checks++; if (n_mup != n_up) begin failures++; $display("FAIL mon_up %0d vs model %0d", n_mup, n_up); end
    checks++; if (n_ovf == 0)   begin failures++; $display("FAIL no overflow protection"); end
    checks++; if (n_flag0 == 0) begin failures++; $display("FAIL no untruncated group"); end
    checks++; if (n_neg == 0)   begin failures++; $display("FAIL no negative product"); end
    checks++; if (n_mode0 == 0 || n_mode1 == 0) begin failures++; $display("FAIL mode not used"); end
    checks++; if (n_dq == 0)    begin failures++; $display("FAIL no De-QR read"); end
    checks++; if (n_oq == 0)    begin failures++; $display("FAIL no accumulator readout"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
