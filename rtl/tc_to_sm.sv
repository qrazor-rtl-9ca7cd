// tc_to_sm: two's-complement to sign-magnitude conversion.
//
// The SDR compressor works on sign-magnitude integers, so a negative
// two's-complement value has its sign bit removed and the remaining bits
// replaced by their two's complement (the magnitude), as in the paper's
// compression pseudo code. The most negative code -2^(BW-1) has no
// sign-magnitude form; this design saturates it to -(2^(BW-1)-1), a choice of
// its own. Combinational, one value per instance.
module tc_to_sm #(
  parameter int BW = 8
) (
  input  logic [BW-1:0] x,
  output logic          sign,
  output logic [BW-2:0] mag
);

  logic [BW-1:0] neg;

  always_comb begin
    sign = x[BW-1];
    neg  = -x;
    if (!x[BW-1])            mag = x[BW-2:0];
    else if (neg[BW-1])      mag = {(BW-1){1'b1}};   // -2^(BW-1) saturates
    else                     mag = neg[BW-2:0];
  end

endmodule
