// qrazor_pe_array: ROWS x COLS grid of decompression-free MAC units.
//
// Output-stationary GEMM tile: PE (r,c) accumulates A[r][k] * B[c][k] over the
// reduction index k. In every enabled clock one code of each activation row
// (with the flag of the group it belongs to) is broadcast along its row and
// one code of each weight (or key) column along its column, so the tile does
// ROWS*COLS MACs per clock. The paper shows the MAC unit sitting in a
// GEMV/GEMM array but not the array's size or wiring; the broadcast wiring and
// the default 8x8 size are this design's own. `clr` with `en` starts new sums.
module qrazor_pe_array
  import qrazor_pkg::*;
#(
  parameter int ROWS      = 8,
  parameter int COLS      = 8,
  parameter int MAX_SHIFT = 16,
  parameter int ACC_W     = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  sdr_code_t [ROWS-1:0]    a_code,
  input  logic [ROWS-1:0][FLAG_W-1:0] a_flag,
  input  sdr_code_t [COLS-1:0]    b_code,
  input  logic [COLS-1:0][FLAG_W-1:0] b_flag,
  output logic signed [ACC_W-1:0] acc [ROWS][COLS]
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      qrazor_mac #(.MAX_SHIFT(MAX_SHIFT), .ACC_W(ACC_W)) u_mac (
        .clk(clk), .rst_n(rst_n), .en(en), .clr(clr),
        .w_code(b_code[c]), .w_flag(b_flag[c]),
        .a_code(a_code[r]), .a_flag(a_flag[r]),
        .acc(acc[r][c])
      );
    end
  end

endmodule
