// qrazor_top: QRazor compute tile with on-the-fly SDR compression.
//
// Data paths:
//  * Weights arrive as INT8 two's-complement groups (already quantized per
//    channel offline), are turned to sign-magnitude and SDR-compressed
//    (base INT8) into the weight memory, one bank per output column.
//  * Activations/queries arrive as FP16 groups, are quantized with a static
//    per-tensor FP16 scale to INT16 sign-magnitude and SDR-compressed into the
//    activation buffer, one bank per row.
//  * Keys/values arrive as FP16 groups, are quantized to INT8 with their own
//    static scale and SDR-compressed into the KV cache, one bank per token.
//  * A run (`start`) multiplies the activation rows with either the weight
//    columns (mode 0, projection layers) or the cached keys (mode 1, Q*K^T)
//    over n_groups groups, using the ROWS x COLS array of decompression-free
//    MACs; the results stay in the accumulators (`acc`) until the next run.
//  * The De-QR port reads one cached group back and dequantizes it to FP16
//    (the V operand of the FP16 S*V product).
//  * The readout port converts one row of accumulators to FP16 with the
//    combined dequantization factor of the two operands. These are the
//    values the FP16 softmax or the next quantizer consumes.
// Every input path accepts one group per clock and writes its memory two
// clocks later (quantize+encode register, then memory). A run takes
// n_groups*G clocks from the edge that takes `start` to `done`; a De-QR read returns two
// clocks after `dq_req`, and an accumulator row one clock after `oq_req`.
// FP16 parts of the transformer (norms, softmax, S*V, activation function)
// are outside this tile. Compression, the MAC unit and
// the dequantizer follow the paper; the tile organisation, memory sizes and
// handshakes are this design's own.
module qrazor_top
  import qrazor_pkg::*;
#(
  parameter int G      = 16,
  parameter int ROWS   = 8,
  parameter int COLS   = 8,
  parameter int DEPTH  = 1024,
  parameter int ACC_W  = 40,
  parameter int AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int RW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int CW     = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight load
  input  logic                    w_valid,
  input  logic [CW-1:0]           w_col,
  input  logic [AW-1:0]           w_grp,
  input  logic [G-1:0][7:0]       w_data,
  // activation / query load
  input  logic                    a_valid,
  input  logic [RW-1:0]           a_row,
  input  logic [AW-1:0]           a_grp,
  input  fp16_t [G-1:0]           a_data,
  input  fp16_t                   a_scale,
  // key / value load
  input  logic                    kv_valid,
  input  logic [CW-1:0]           kv_tok,
  input  logic [AW-1:0]           kv_grp,
  input  fp16_t [G-1:0]           kv_data,
  input  fp16_t                   kv_scale,
  // GEMM run
  input  logic                    start,
  input  logic                    mode,      // 0: weights, 1: KV cache
  input  logic [AW:0]             n_groups,
  output logic                    busy,
  output logic                    done,
  output logic signed [ACC_W-1:0] acc [ROWS][COLS],
  // De-QR read of the KV cache
  input  logic                    dq_req,
  input  logic [CW-1:0]           dq_tok,
  input  logic [AW-1:0]           dq_grp,
  input  fp16_t                   dq_scale,
  output logic                    dq_valid,
  output fp16_t [G-1:0]           dq_data,
  // FP16 readout of one accumulator row (results of the last run)
  input  logic                    oq_req,
  input  logic [RW-1:0]           oq_row,
  input  fp16_t                   oq_scale,  // product of both operands' dequantization factors
  output logic                    oq_valid,
  output fp16_t [COLS-1:0]        oq_data,
  // monitors: elements saturated by the quantizers, protected from overflow,
  // rounded up by the encoders (counts over the previous clock)
  output logic [7:0]              mon_sat,
  output logic [7:0]              mon_ovf,
  output logic [7:0]              mon_up
);

  localparam int KW = (G > 1) ? $clog2(G) : 1;

  // ---------------- weight path: INT8 -> sign-magnitude -> SDR ------------
  logic [G-1:0]       w_sign;
  logic [G-1:0][6:0]  w_mag;
  for (genvar i = 0; i < G; i++) begin : g_wsm
    tc_to_sm #(.BW(8)) u_sm (.x(w_data[i]), .sign(w_sign[i]), .mag(w_mag[i]));
  end

  logic              we_v;
  sdr_code_t [G-1:0] we_code;
  logic [FLAG_W-1:0] we_flag;
  logic [G-1:0]      we_ovf, we_up;
  logic [CW-1:0]     we_col;
  logic [AW-1:0]     we_grp;
  sdr_encoder #(.G(G), .BW(8)) u_wenc (
    .clk, .rst_n, .in_valid(w_valid), .in_sign(w_sign), .in_mag(w_mag),
    .out_valid(we_v), .out_code(we_code), .out_flag(we_flag),
    .out_ovf_mask(we_ovf), .out_up_mask(we_up)
  );

  // ---------------- activation path: FP16 -> INT16 -> SDR -----------------
  logic [G-1:0]       a_sign, a_sat;
  logic [G-1:0][14:0] a_mag;
  for (genvar i = 0; i < G; i++) begin : g_aq
    fp16_quantizer #(.BW(16)) u_q (.x(a_data[i]), .scale(a_scale),
      .q_sign(a_sign[i]), .q_mag(a_mag[i]), .sat(a_sat[i]));
  end

  logic              ae_v;
  sdr_code_t [G-1:0] ae_code;
  logic [FLAG_W-1:0] ae_flag;
  logic [G-1:0]      ae_ovf, ae_up;
  logic [RW-1:0]     ae_row;
  logic [AW-1:0]     ae_grp;
  sdr_encoder #(.G(G), .BW(16)) u_aenc (
    .clk, .rst_n, .in_valid(a_valid), .in_sign(a_sign), .in_mag(a_mag),
    .out_valid(ae_v), .out_code(ae_code), .out_flag(ae_flag),
    .out_ovf_mask(ae_ovf), .out_up_mask(ae_up)
  );

  // ---------------- KV path: FP16 -> INT8 -> SDR --------------------------
  logic [G-1:0]       kv_sign, kv_sat;
  logic [G-1:0][6:0]  kv_mag;
  for (genvar i = 0; i < G; i++) begin : g_kq
    fp16_quantizer #(.BW(8)) u_q (.x(kv_data[i]), .scale(kv_scale),
      .q_sign(kv_sign[i]), .q_mag(kv_mag[i]), .sat(kv_sat[i]));
  end

  logic              ke_v;
  sdr_code_t [G-1:0] ke_code;
  logic [FLAG_W-1:0] ke_flag;
  logic [G-1:0]      ke_ovf, ke_up;
  logic [CW-1:0]     ke_tok;
  logic [AW-1:0]     ke_grp;
  sdr_encoder #(.G(G), .BW(8)) u_kenc (
    .clk, .rst_n, .in_valid(kv_valid), .in_sign(kv_sign), .in_mag(kv_mag),
    .out_valid(ke_v), .out_code(ke_code), .out_flag(ke_flag),
    .out_ovf_mask(ke_ovf), .out_up_mask(ke_up)
  );

  // addresses travel alongside the encoder register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we_col <= '0; we_grp <= '0;
      ae_row <= '0; ae_grp <= '0;
      ke_tok <= '0; ke_grp <= '0;
    end else begin
      if (w_valid)  begin we_col <= w_col;  we_grp <= w_grp;  end
      if (a_valid)  begin ae_row <= a_row;  ae_grp <= a_grp;  end
      if (kv_valid) begin ke_tok <= kv_tok; ke_grp <= kv_grp; end
    end
  end

  // ---------------- sequencer ---------------------------------------------
  logic          rd_en;
  logic [AW-1:0] rd_addr;
  logic [KW-1:0] k_sel;
  logic          pe_en, pe_clr;
  logic          run_mode;

  qrazor_gemm_ctrl #(.G(G), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .n_groups, .rd_en, .rd_addr, .k_sel,
    .pe_en, .pe_clr, .busy, .done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 run_mode <= 1'b0;
    else if (start && !busy)    run_mode <= mode;
  end

  // ---------------- memories ----------------------------------------------
  sdr_code_t [ROWS-1:0][G-1:0]     act_rcode;
  logic [ROWS-1:0][FLAG_W-1:0]     act_rflag;
  sdr_code_t [COLS-1:0][G-1:0]     wt_rcode, kv_rcode0, kv_rcode1;
  logic [COLS-1:0][FLAG_W-1:0]     wt_rflag, kv_rflag0, kv_rflag1;
  logic                            b_is_kv;

  assign b_is_kv = start && !busy ? mode : run_mode;

  for (genvar r = 0; r < ROWS; r++) begin : g_abuf
    sdr_code_t [G-1:0] unused_code;
    logic [FLAG_W-1:0] unused_flag;
    sdr_group_mem #(.G(G), .DEPTH(DEPTH)) u_mem (
      .clk, .we(ae_v && ae_row == RW'(r)), .waddr(ae_grp),
      .wcode(ae_code), .wflag(ae_flag),
      .re0(rd_en), .raddr0(rd_addr), .rcode0(act_rcode[r]), .rflag0(act_rflag[r]),
      .re1(1'b0), .raddr1('0), .rcode1(unused_code), .rflag1(unused_flag)
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_wmem
    sdr_code_t [G-1:0] unused_code;
    logic [FLAG_W-1:0] unused_flag;
    sdr_group_mem #(.G(G), .DEPTH(DEPTH)) u_mem (
      .clk, .we(we_v && we_col == CW'(c)), .waddr(we_grp),
      .wcode(we_code), .wflag(we_flag),
      .re0(rd_en && !b_is_kv), .raddr0(rd_addr), .rcode0(wt_rcode[c]), .rflag0(wt_rflag[c]),
      .re1(1'b0), .raddr1('0), .rcode1(unused_code), .rflag1(unused_flag)
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_kv
    sdr_group_mem #(.G(G), .DEPTH(DEPTH)) u_mem (
      .clk, .we(ke_v && ke_tok == CW'(c)), .waddr(ke_grp),
      .wcode(ke_code), .wflag(ke_flag),
      .re0(rd_en && b_is_kv), .raddr0(rd_addr), .rcode0(kv_rcode0[c]), .rflag0(kv_rflag0[c]),
      .re1(dq_req && dq_tok == CW'(c)), .raddr1(dq_grp),
      .rcode1(kv_rcode1[c]), .rflag1(kv_rflag1[c])
    );
  end

  // ---------------- PE array ----------------------------------------------
  sdr_code_t [ROWS-1:0]           pa_code;
  logic [ROWS-1:0][FLAG_W-1:0]    pa_flag;
  sdr_code_t [COLS-1:0]           pb_code;
  logic [COLS-1:0][FLAG_W-1:0]    pb_flag;

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      pa_code[r] = act_rcode[r][k_sel];
      pa_flag[r] = act_rflag[r];
    end
    for (int c = 0; c < COLS; c++) begin
      pb_code[c] = run_mode ? kv_rcode0[c][k_sel] : wt_rcode[c][k_sel];
      pb_flag[c] = run_mode ? kv_rflag0[c]        : wt_rflag[c];
    end
  end

  qrazor_pe_array #(.ROWS(ROWS), .COLS(COLS), .MAX_SHIFT(16), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .en(pe_en), .clr(pe_clr),
    .a_code(pa_code), .a_flag(pa_flag), .b_code(pb_code), .b_flag(pb_flag),
    .acc(acc)
  );

  // ---------------- De-QR read path ---------------------------------------
  logic          dq_p1, dq_p2;
  logic [CW-1:0] dq_tok_q;
  fp16_t         dq_scale_q;
  sdr_code_t [G-1:0] dq_code;
  logic [FLAG_W-1:0] dq_flag;
  fp16_t [G-1:0]     dq_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dq_p1 <= 1'b0; dq_p2 <= 1'b0; dq_tok_q <= '0; dq_scale_q <= '0;
      dq_data <= '0;
    end else begin
      dq_p1 <= dq_req;
      dq_p2 <= dq_p1;
      if (dq_req) begin
        dq_tok_q   <= dq_tok;
        dq_scale_q <= dq_scale;
      end
      if (dq_p1) dq_data <= dq_y;
    end
  end
  assign dq_valid = dq_p2;

  assign dq_code = kv_rcode1[dq_tok_q];
  assign dq_flag = kv_rflag1[dq_tok_q];
  for (genvar i = 0; i < G; i++) begin : g_dq
    sdr_dequant u_dq (.code(dq_code[i]), .flag(dq_flag), .scale(dq_scale_q), .y(dq_y[i]));
  end

  // ---------------- accumulator readout to FP16 --------------------------
  fp16_t [COLS-1:0] oq_y;
  for (genvar c = 0; c < COLS; c++) begin : g_oq
    acc_dequant #(.ACC_W(ACC_W)) u_oq (.acc(acc[oq_row][c]), .scale(oq_scale), .y(oq_y[c]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oq_valid <= 1'b0;
      oq_data  <= '0;
    end else begin
      oq_valid <= oq_req;
      if (oq_req) oq_data <= oq_y;
    end
  end

  // ---------------- monitors ----------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mon_sat <= '0;
      mon_ovf <= '0;
      mon_up  <= '0;
    end else begin
      mon_sat <= 8'((a_valid ? $countones(a_sat) : 0) + (kv_valid ? $countones(kv_sat) : 0));
      mon_ovf <= 8'((we_v ? $countones(we_ovf) : 0) + (ae_v ? $countones(ae_ovf) : 0) +
                    (ke_v ? $countones(ke_ovf) : 0));
      mon_up  <= 8'((we_v ? $countones(we_up) : 0) + (ae_v ? $countones(ae_up) : 0) +
                    (ke_v ? $countones(ke_up) : 0));
    end
  end

endmodule
