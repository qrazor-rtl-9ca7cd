// tb_llama2_7b_g16: LLaMA-2-7B layer shapes (projections K=4096, down
// projection K=11008, one attention head of dimension 128) on the QRazor tile
// with razoring group size 16; see qrazor_llama_harness for the checks.
module tb_llama2_7b_g16;
  logic clk = 0;
  logic finished;
  int   checks, failures;
  always #5 clk = ~clk;

  qrazor_llama_harness #(.G(16)) u_h (.clk(clk), .finished(finished), .checks(checks), .failures(failures));

  initial begin
    wait (finished === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
