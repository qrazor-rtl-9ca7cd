// tb_qrazor_pe_array: streams random SDR codes into a 3x2 array and checks
// every accumulator against A*B^T computed on the decompressed integers.
module tb_qrazor_pe_array;
  import qrazor_pkg::*;
  localparam int ROWS = 3, COLS = 2, ACC_W = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en, clr;
  sdr_code_t [ROWS-1:0] a_code;  logic [ROWS-1:0][FLAG_W-1:0] a_flag;
  sdr_code_t [COLS-1:0] b_code;  logic [COLS-1:0][FLAG_W-1:0] b_flag;
  logic signed [ACC_W-1:0] acc [ROWS][COLS];
  qrazor_pe_array #(.ROWS(ROWS), .COLS(COLS), .MAX_SHIFT(16), .ACC_W(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  longint ref_acc [ROWS][COLS];

  function automatic longint dv(input sdr_code_t c, input logic [FLAG_W-1:0] f);
    longint v; v = longint'(c.mag) <<< int'(f);
    return c.sign ? -v : v;
  endfunction

  initial begin
    en = 0; clr = 0; a_code = '0; a_flag = '0; b_code = '0; b_flag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int len; len = $urandom_range(1, 64);
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        en = 1; clr = (k == 0);
        for (int r = 0; r < ROWS; r++) begin a_code[r] = 4'($urandom); a_flag[r] = 4'($urandom_range(0, 12)); end
        for (int c = 0; c < COLS; c++) begin b_code[c] = 4'($urandom); b_flag[c] = 4'($urandom_range(0, 4)); end
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            ref_acc[r][c] = (k == 0 ? 0 : ref_acc[r][c]) + dv(a_code[r], a_flag[r]) * dv(b_code[c], b_flag[c]);
      end
      @(negedge clk); en = 0; clr = 0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (longint'(acc[r][c]) != ref_acc[r][c]) begin
            failures++; $display("FAIL run=%0d r=%0d c=%0d %0d %0d", run, r, c, acc[r][c], ref_acc[r][c]);
          end
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
