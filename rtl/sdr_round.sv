// sdr_round: truncation and rounding of one element to its salient bits.
//
// Given the group flag f (number of LSBs to cut), the kept magnitude is
// mag >> f, which the razoring point guarantees fits in SAL_W bits. The first
// cut bit, mag[f-1], is the rounding bit: when it is 1 the kept value is
// rounded up, except when all kept bits are already 1, where rounding up would
// carry into the sign position; that element is floored instead (the paper's
// overflow protection). Outputs flag which of the two cases happened.
// Only the low SAL_W bits of the shifted value are read; the guarantee above
// leaves its upper bits zero. Combinational.
module sdr_round
  import qrazor_pkg::*;
#(
  parameter int MAG_W = 15
) (
  input  logic [MAG_W-1:0]  mag,
  input  logic [FLAG_W-1:0] flag,
  output logic [SAL_W-1:0]  q,
  output logic              rounded_up,
  output logic              ovf_protect
);

  logic [MAG_W-1:0] kept;
  logic [MAG_W-1:0] half;
  logic             rbit;

  always_comb begin
    kept = mag >> flag;
    // rounding bit = mag[flag-1]
    half = (flag != '0) ? (MAG_W'(1) << (flag - FLAG_W'(1))) : '0;
    rbit = |(mag & half);
    rounded_up  = 1'b0;
    ovf_protect = 1'b0;
    if (rbit && (kept[SAL_W-1:0] == {SAL_W{1'b1}})) begin
      q           = kept[SAL_W-1:0];
      ovf_protect = 1'b1;
    end else if (rbit) begin
      q          = kept[SAL_W-1:0] + SAL_W'(1);
      rounded_up = 1'b1;
    end else begin
      q = kept[SAL_W-1:0];
    end
  end

endmodule
