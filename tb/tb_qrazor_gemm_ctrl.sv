// tb_qrazor_gemm_ctrl: checks the sequencer's cycle-level schedule: read of
// group 0 on start, G enabled clocks per group with k = 0..G-1, the next read
// in the last clock of each group, clear on the first MAC only, and done
// high n_groups*G clocks after the clock edge that takes start.
module tb_qrazor_gemm_ctrl;
  localparam int G = 4, DEPTH = 8, AW = 3, KW = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start;
  logic [AW:0] n_groups;
  logic rd_en, pe_en, pe_clr, busy, done;
  logic [AW-1:0] rd_addr;
  logic [KW-1:0] k_sel;
  qrazor_gemm_ctrl #(.G(G), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic run(input int n);
    int cyc, en_cnt, rd_cnt, clr_cnt, exp_grp, exp_k;
    @(negedge clk);
    start = 1; n_groups = (AW+1)'(n);
    #1; checks++;
    if (!rd_en || rd_addr != 0) begin failures++; $display("FAIL first read"); end
    @(negedge clk); start = 0;
    cyc = 1; en_cnt = 0; rd_cnt = 1; clr_cnt = 0; exp_grp = 0; exp_k = 0;
    while (!done && cyc < 1000) begin
      if (pe_en) begin
        checks++;
        if (int'(k_sel) != exp_k) begin failures++; $display("FAIL k=%0d exp=%0d", k_sel, exp_k); end
        en_cnt++; clr_cnt += pe_clr;
        if (rd_en) begin
          rd_cnt++; checks++;
          if (exp_k != G - 1 || int'(rd_addr) != exp_grp + 1) begin failures++; $display("FAIL prefetch"); end
        end
        if (exp_k == G - 1) begin exp_k = 0; exp_grp++; end else exp_k++;
      end
      @(negedge clk); cyc++;
    end
    checks += 4;
    // cyc counts from the falling edge before the edge that takes start
    if (cyc - 1 != n * G) begin failures++; $display("FAIL latency %0d exp %0d", cyc - 1, n * G); end
    if (en_cnt != n * G)  begin failures++; $display("FAIL en count %0d", en_cnt); end
    if (rd_cnt != n)      begin failures++; $display("FAIL reads %0d", rd_cnt); end
    if (clr_cnt != 1)     begin failures++; $display("FAIL clears %0d", clr_cnt); end
    @(negedge clk); checks++;
    if (busy || done) begin failures++; $display("FAIL not idle"); end
  endtask

  initial begin
    start = 0; n_groups = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 1; n <= DEPTH; n++) run(n);
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
