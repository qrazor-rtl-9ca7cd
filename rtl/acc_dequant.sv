// acc_dequant: turns one integer GEMM result back into FP16.
//
// The compute array accumulates exact integer products of the two base
// integers: INT8 weight x INT16 activation, or INT16 query x INT8 key. The
// flag shifts are already applied inside the MAC, so no group-level work is
// left at this point. The only remaining step is the absolute-max
// dequantization X^ = (|Xmax|/(2^(BW-1)-1)) * Xq, applied once for each
// operand. `scale` is the product of the two operands' dequantization
// factors, precomputed as one FP16 number. The output is
// y = acc * scale, rounded to FP16.
//
// How it works: the magnitude of the signed accumulator is multiplied
// exactly by the 11-bit significand of `scale`. The product is rounded once
// to FP16: nearest, ties to even, subnormals kept, overflow to infinity.
// An infinite or NaN scale is passed through with the sign applied.
// Combinational.
//
// From the paper: the dequantization formula, and that the results of the
// INT4 matrix products feed FP16 operations (softmax, and the next
// quantizer). The single combined scale and the FP16 rounding are this
// design's own choices.
module acc_dequant
  import qrazor_pkg::*;
#(
  parameter int ACC_W = 40
) (
  input  logic signed [ACC_W-1:0] acc,
  input  fp16_t                   scale,
  output fp16_t                   y
);

  logic [4:0]        es;
  logic [10:0]       ms;
  logic [ACC_W-1:0]  mag;
  logic              neg;
  logic [63:0]       p;
  int                e;

  always_comb begin
    es  = scale[14:10];
    ms  = (es == 5'd0) ? {1'b0, scale[9:0]} : {1'b1, scale[9:0]};
    neg = acc[ACC_W-1];
    mag = neg ? (~acc + 1'b1) : acc;        // -2^(ACC_W-1) stays exact as unsigned
    p   = 64'(mag) * 64'(ms);
    e   = ((es == 5'd0) ? 1 : int'(es)) - 25;
    if (es == 5'h1f) y = {neg ^ scale[15], scale[14:0]};
    else             y = fp16_from_scaled(neg ^ scale[15], p, e);
  end

  initial begin
    assert (ACC_W + 11 <= 64) else $error("acc_dequant: ACC_W too large for the 64-bit product");
  end

endmodule
