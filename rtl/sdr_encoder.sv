// sdr_encoder: significant data razoring (SDR) of one group per clock.
//
// Input: G sign-magnitude integers of base precision BW (BW-1 magnitude
// bits). The razoring point of the group is found by a bitwise OR and a
// leading-one search (sdr_razor_point); every element then keeps its sign and
// the SAL_W = 3 salient bits below that point, rounded on the first cut bit
// with the overflow protection of sdr_round. Output: G 4-bit codes and one
// 4-bit flag (number of cut LSBs) for the group. This is the paper's
// compression stage; the register stage and the valid-only interface (no
// back-pressure, one group accepted every cycle, result one cycle later) are
// this design's own. `ovf_mask`/`up_mask` report per element whether the
// overflow protection or a round-up was applied, for monitoring.
// The OR word, leading-one index and any-one outputs of the razoring-point
// unit are not needed here and stay unread. Synthesis removes them.
module sdr_encoder
  import qrazor_pkg::*;
#(
  parameter int G  = 16,
  parameter int BW = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [G-1:0]              in_sign,
  input  logic [G-1:0][BW-2:0]      in_mag,
  output logic                      out_valid,
  output sdr_code_t [G-1:0]         out_code,
  output logic [FLAG_W-1:0]         out_flag,
  output logic [G-1:0]              out_ovf_mask,
  output logic [G-1:0]              out_up_mask
);

  localparam int MAG_W = BW - 1;

  logic [MAG_W-1:0]  or_bits;
  logic [FLAG_W-1:0] flag;
  logic [4:0]        lead;
  logic              any_one;
  logic [G-1:0][SAL_W-1:0] q;
  logic [G-1:0]      up, ovf;

  sdr_razor_point #(.G(G), .MAG_W(MAG_W)) u_rp (
    .mag(in_mag), .or_bits(or_bits), .flag(flag), .lead(lead), .any_one(any_one)
  );

  for (genvar i = 0; i < G; i++) begin : g_round
    sdr_round #(.MAG_W(MAG_W)) u_rnd (
      .mag(in_mag[i]), .flag(flag), .q(q[i]),
      .rounded_up(up[i]), .ovf_protect(ovf[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out_code     <= '0;
      out_flag     <= '0;
      out_ovf_mask <= '0;
      out_up_mask  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < G; i++) out_code[i] <= '{sign: in_sign[i], mag: q[i]};
        out_flag     <= flag;
        out_ovf_mask <= ovf;
        out_up_mask  <= up;
      end
    end
  end

endmodule
