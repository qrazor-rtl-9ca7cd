// sdr_dequant: QRazor dequantization (De-QR) of one SDR code to FP16.
//
// The base integer is rebuilt by shifting the 3 salient bits back up by the
// group flag (the number of LSBs the compressor cut), and is then rescaled
// with the static dequantization factor |Xmax| / (2^(BW-1)-1), given as FP16:
// y = (-1)^sign * (mag << flag) * scale. The paper names this step and gives
// the shift-based reconstruction and the scaling formula; the FP16 arithmetic
// (exact 3x11-bit product, round to nearest even, subnormals kept, overflow
// to infinity) is this design's own. Combinational.
module sdr_dequant
  import qrazor_pkg::*;
(
  input  sdr_code_t         code,
  input  logic [FLAG_W-1:0] flag,
  input  fp16_t             scale,
  output fp16_t             y
);

  logic [10:0] ms;
  logic [4:0]  es;
  logic [63:0] p;
  int          e;

  always_comb begin
    es = scale[14:10];
    ms = (es == 5'd0) ? {1'b0, scale[9:0]} : {1'b1, scale[9:0]};
    p  = 64'(code.mag) * 64'(ms);
    e  = int'(flag) + ((es == 5'd0) ? 1 : int'(es)) - 25;
    if (es == 5'h1f) y = {code.sign ^ scale[15], scale[14:0]};   // inf / NaN pass
    else             y = fp16_from_scaled(code.sign ^ scale[15], p, e);
  end

endmodule
