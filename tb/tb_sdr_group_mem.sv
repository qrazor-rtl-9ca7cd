// tb_sdr_group_mem: random writes and reads on both read ports against a
// shadow array; checks the one-clock read latency and that outputs hold
// while the read enable is low.
module tb_sdr_group_mem;
  import qrazor_pkg::*;
  localparam int G = 4, DEPTH = 16, AW = 4, W = G * CODE_W + FLAG_W;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we, re0, re1;
  logic [AW-1:0] waddr, raddr0, raddr1;
  sdr_code_t [G-1:0] wcode, rcode0, rcode1;
  logic [FLAG_W-1:0] wflag, rflag0, rflag1;
  sdr_group_mem #(.G(G), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  logic [W-1:0] shadow [DEPTH];
  logic [W-1:0] exp0, exp1;

  initial begin
    we = 1; re0 = 0; re1 = 0; raddr0 = '0; raddr1 = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      waddr = AW'(a); {wcode, wflag} = W'($urandom); shadow[a] = {wcode, wflag};
    end
    @(negedge clk); we = 0;
    re0 = 1; re1 = 1; raddr0 = 0; raddr1 = 0;
    @(negedge clk); exp0 = shadow[0]; exp1 = shadow[0];
    for (int t = 0; t < 2000; t++) begin
      logic [W-1:0] nw;
      we = $urandom_range(0, 1); waddr = AW'($urandom); nw = W'($urandom);
      {wcode, wflag} = nw;
      re0 = $urandom_range(0, 1); re1 = $urandom_range(0, 1);
      raddr0 = AW'($urandom); raddr1 = AW'($urandom);
      @(negedge clk);
      if (re0) exp0 = shadow[raddr0];
      if (re1) exp1 = shadow[raddr1];
      if (we) shadow[waddr] = nw;
      checks++;
      if ({rcode0, rflag0} !== exp0 || {rcode1, rflag1} !== exp1) begin
        failures++; $display("FAIL t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
