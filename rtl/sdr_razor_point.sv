// sdr_razor_point: finds the razoring point of one SDR group.
//
// All G magnitudes of the group are ORed bit by bit; the position p of the
// leading one of that OR is the razoring point, the highest bit any element of
// the group uses. The SAL_W bits from p downwards are kept, so the number of
// cut-away LSBs, which is the group's flag, is max(p - (SAL_W-1), 0). An
// all-zero group gets flag 0. This is the bitwise-OR plus leading-one scheme
// of the paper; the priority encoder is written as a plain loop.
// Combinational; `lead` is the razoring point (0 for an all-zero group) and
// `any_one` tells whether the group holds a non-zero magnitude.
module sdr_razor_point
  import qrazor_pkg::*;
#(
  parameter int G     = 16,
  parameter int MAG_W = 15
) (
  input  logic [G-1:0][MAG_W-1:0] mag,
  output logic [MAG_W-1:0]        or_bits,
  output logic [FLAG_W-1:0]       flag,
  output logic [4:0]              lead,
  output logic                    any_one
);

  always_comb begin
    or_bits = '0;
    for (int i = 0; i < G; i++) or_bits |= mag[i];
    lead = '0;
    for (int b = 0; b < MAG_W; b++) if (or_bits[b]) lead = 5'(b);
    any_one = |or_bits;
    if (lead >= 5'(SAL_W - 1)) flag = FLAG_W'(lead - 5'(SAL_W - 1));
    else                       flag = '0;
  end

  initial assert (MAG_W - SAL_W < (1 << FLAG_W))
    else $error("flag field too narrow for MAG_W=%0d", MAG_W);

endmodule
