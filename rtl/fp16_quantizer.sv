// fp16_quantizer: static absolute-max quantization of one FP16 value.
//
// Computes q = round(x * scale) and returns it as a BW-bit sign-magnitude
// integer, the "base precision" format that the SDR compressor consumes
// (BW = 16 for activations and queries, 8 for weights and KV cache). The scale
// is the per-tensor (or per-channel) factor (2^(BW-1)-1)/|Xmax| fixed at
// calibration time and supplied as an FP16 input. The paper gives the formula
// and the sign-magnitude output; the arithmetic below is this design's own:
// the two 11-bit significands are multiplied exactly, the 22-bit product is
// shifted to the integer grid and rounded half away from zero, and results
// beyond 2^(BW-1)-1 (including infinities) saturate and raise `sat`. NaN
// inputs give zero. Purely combinational.
module fp16_quantizer
  import qrazor_pkg::*;
#(
  parameter int BW = 16
) (
  input  fp16_t          x,
  input  fp16_t          scale,
  output logic           q_sign,
  output logic [BW-2:0]  q_mag,
  output logic           sat
);

  localparam logic [BW-2:0] QMAX = {(BW-1){1'b1}};

  logic        sx, ss;
  logic [4:0]  ex, es;
  logic [10:0] mx, ms;
  logic [21:0] prod;
  logic        nan_in, inf_in;
  int          k;           // product value = prod * 2^(-k)
  logic [47:0] shifted;
  logic [47:0] rounded;

  always_comb begin
    sx = x[15];      ss = scale[15];
    ex = x[14:10];   es = scale[14:10];
    mx = (ex == 5'd0) ? {1'b0, x[9:0]}     : {1'b1, x[9:0]};
    ms = (es == 5'd0) ? {1'b0, scale[9:0]} : {1'b1, scale[9:0]};
    nan_in = ((ex == 5'h1f) && (x[9:0] != 10'd0)) ||
             ((es == 5'h1f) && (scale[9:0] != 10'd0));
    inf_in = (ex == 5'h1f) || (es == 5'h1f);
    prod = mx * ms;
    // exponents of subnormals count as 1
    k = 50 - ((ex == 5'd0) ? 1 : int'(ex)) - ((es == 5'd0) ? 1 : int'(es));
    shifted = '0;
    rounded = '0;
    sat     = 1'b0;
    if (k > 0) begin
      if (k > 22) begin
        rounded = '0;
      end else begin
        shifted = {26'd0, prod} >> k;
        rounded = shifted + {47'd0, prod[k-1]};
      end
    end else if (k > -BW) begin
      rounded = {26'd0, prod} << (-k);
    end else if (prod != 22'd0) begin
      rounded = '1;
    end
    q_sign = sx ^ ss;
    if (nan_in) begin
      q_mag  = '0;
      q_sign = 1'b0;
    end else if (inf_in || (rounded > {{(48-BW+1){1'b0}}, QMAX})) begin
      q_mag = QMAX;
      sat   = 1'b1;
    end else begin
      q_mag = rounded[BW-2:0];
    end
    if (q_mag == '0) q_sign = 1'b0;
  end

endmodule
