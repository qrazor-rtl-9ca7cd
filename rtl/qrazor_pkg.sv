// qrazor_pkg: shared types, constants and FP16 helpers of the QRazor datapath.
//
// A compressed element ("SDR code") is 4 bits: a sign bit and the three salient
// magnitude bits kept after razoring. Every group of G codes shares one 4-bit
// flag that counts how many magnitude LSBs were cut away; the value of a code is
// (-1)^sign * mag * 2^flag in the base integer precision (INT16 for activations,
// INT8 for weights and KV cache). The 4-bit code and 4-bit flag follow the paper;
// the FP16 helper functions are this design's own and handle normal and
// subnormal numbers with round-to-nearest-even; infinities and NaN saturate.
package qrazor_pkg;

  localparam int CODE_W = 4;            // sign + salient bits
  localparam int SAL_W  = CODE_W - 1;   // salient magnitude bits
  localparam int FLAG_W = 4;            // truncated-LSB count per group

  typedef logic [15:0] fp16_t;

  typedef struct packed {
    logic             sign;
    logic [SAL_W-1:0] mag;
  } sdr_code_t;

  // Round a non-negative integer p (value p * 2^e) to an FP16 with sign s.
  // Round to nearest, ties to even; overflow gives infinity; subnormals kept.
  function automatic fp16_t fp16_from_scaled(input logic s, input logic [63:0] p,
                                             input int e);
    int   msb;
    int   lsb_exp;
    int   drop;
    int   bexp;
    logic [63:0] sh;
    logic        rb;
    logic        sticky;
    logic [63:0] mask;
    msb = -1;
    for (int i = 0; i < 64; i++) if (p[i]) msb = i;
    if (msb < 0) return {s, 15'd0};
    lsb_exp = msb + e - 10;
    if (lsb_exp < -24) lsb_exp = -24;
    drop = lsb_exp - e;
    if (drop > 0) begin
      if (drop > 63) begin
        sh = '0; rb = 1'b0; sticky = |p;
      end else begin
        sh     = p >> drop;
        rb     = p[drop-1];
        mask   = (64'd1 << (drop - 1)) - 64'd1;
        sticky = |(p & mask);
      end
      if (rb && (sticky || sh[0])) sh = sh + 64'd1;
    end else begin
      sh = p << (-drop);
    end
    if (sh[11]) begin
      sh = sh >> 1;
      lsb_exp = lsb_exp + 1;
    end
    if (sh[10]) begin
      bexp = lsb_exp + 10 + 15;
      if (bexp >= 31) return {s, 5'h1f, 10'd0};
      return {s, bexp[4:0], sh[9:0]};
    end
    return {s, 5'd0, sh[9:0]};
  endfunction

endpackage
