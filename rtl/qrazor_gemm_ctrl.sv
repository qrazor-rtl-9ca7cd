// qrazor_gemm_ctrl: sequencer that streams SDR groups into the PE array.
//
// On `start` it reads group 0 of every operand bank (one clock, synchronous
// memories), then spends G clocks walking the element index k = 0..G-1 of the
// groups held at the memory outputs while enabling the PE array; in the last
// of those clocks it already requests the next group, so the array is busy
// every clock after the first. After n_groups groups it pulses `done` one
// clock after the last MAC: done is high n_groups*G clocks after the
// clock edge that takes start. The
// first MAC of a run clears the accumulators. The paper does not describe the
// control of the array; this sequencer is this design's own minimal one.
module qrazor_gemm_ctrl #(
  parameter int G     = 16,
  parameter int DEPTH = 1024,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int KW    = (G > 1) ? $clog2(G) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   n_groups,   // 1..DEPTH
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  output logic [KW-1:0] k_sel,
  output logic          pe_en,
  output logic          pe_clr,
  output logic          busy,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_DONE} state_t;
  state_t       state;
  logic [AW:0]  grp;
  logic [KW-1:0] k;
  logic         first;

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = grp[AW-1:0];
    pe_en   = (state == S_STREAM);
    pe_clr  = (state == S_STREAM) && first;
    k_sel   = k;
    busy    = (state != S_IDLE);
    done    = (state == S_DONE);
    if (state == S_IDLE && start) begin
      rd_en   = 1'b1;
      rd_addr = '0;
    end else if (state == S_STREAM && k == KW'(G - 1) && (grp + 1'b1) < n_groups) begin
      rd_en   = 1'b1;
      rd_addr = AW'(grp + 1'b1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      grp   <= '0;
      k     <= '0;
      first <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start && n_groups != '0) begin
          state <= S_STREAM;
          grp   <= '0;
          k     <= '0;
          first <= 1'b1;
        end
        S_STREAM: begin
          first <= 1'b0;
          if (k == KW'(G - 1)) begin
            k <= '0;
            if ((grp + 1'b1) < n_groups) grp <= grp + 1'b1;
            else                         state <= S_DONE;
          end else begin
            k <= k + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
