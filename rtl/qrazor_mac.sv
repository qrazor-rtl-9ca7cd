// qrazor_mac: decompression-free multiply-accumulate unit.
//
// Operates directly on SDR codes. The sign bits of the weight and activation
// codes are taken off ("sign bit flip"), leaving two 4-bit operands 0mmm that
// a 4x4 unsigned multiplier combines. The product is moved to its
// base-precision position by one barrel shift of flag_w + flag_a bits (the two
// groups' truncated-LSB counts) and added to, or subtracted from (signs
// differ), the accumulator. The result equals what a MAC on fully decompressed
// INT8 x INT16 operands would give. Multiplier, single shifter and
// accumulator follow the paper; the accumulator width, the shift range and
// the en/clr interface are this design's own. One MAC per clock when `en`;
// `clr` restarts the sum (with `en`, the first product is loaded at once).
module qrazor_mac
  import qrazor_pkg::*;
#(
  parameter int MAX_SHIFT = 16,  // 4 (INT8 weight) + 12 (INT16 activation)
  parameter int ACC_W     = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  sdr_code_t               w_code,
  input  logic [FLAG_W-1:0]       w_flag,
  input  sdr_code_t               a_code,
  input  logic [FLAG_W-1:0]       a_flag,
  output logic signed [ACC_W-1:0] acc
);

  localparam int PROD_W = 2 * CODE_W;
  localparam int SH_W   = PROD_W + MAX_SHIFT;

  logic [CODE_W-1:0]  op_w, op_a;
  logic [PROD_W-1:0]  prod;
  logic [FLAG_W:0]    shamt;
  logic [SH_W-1:0]    shifted;
  logic               neg;
  logic signed [ACC_W-1:0] term, base;

  always_comb begin
    op_w    = {1'b0, w_code.mag};           // sign bit flip
    op_a    = {1'b0, a_code.mag};
    prod    = op_w * op_a;                  // 4x4 multiplier
    shamt   = {1'b0, w_flag} + {1'b0, a_flag};
    shifted = SH_W'(prod) << shamt;         // single barrel shifter
    neg     = w_code.sign ^ a_code.sign;
    term    = neg ? -ACC_W'(shifted) : ACC_W'(shifted);
    base    = clr ? '0 : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (en)      acc <= base + term;
    else if (clr)     acc <= '0;
  end

  // The shift must stay inside the shifter; 16 covers INT8 x INT16 operands.
  a_shift_range: assert property (@(posedge clk) en |-> shamt <= (FLAG_W+1)'(MAX_SHIFT))
    else $error("qrazor_mac: shift %0d beyond %0d", shamt, MAX_SHIFT);

endmodule
