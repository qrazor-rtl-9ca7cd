// sdr_group_mem: storage for compressed SDR groups (weight memory, KV cache,
// activation buffer).
//
// One word holds a whole group: G 4-bit codes and the group's 4-bit flag, so
// a group costs 4*G + 4 bits, the 4 + 4/G effective bits per value of the
// paper. One synchronous write port and two synchronous read ports with a
// registered output (data one clock after the request, held until the next
// request on that port). The paper shows the memory and the KV cache holding
// the compressed 4-bit values; depth and port count are this design's own.
// Written as a plain array so a synthesis tool can map it to an SRAM.
module sdr_group_mem
  import qrazor_pkg::*;
#(
  parameter int G     = 16,
  parameter int DEPTH = 1024,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  sdr_code_t [G-1:0]    wcode,
  input  logic [FLAG_W-1:0]    wflag,
  input  logic                 re0,
  input  logic [AW-1:0]        raddr0,
  output sdr_code_t [G-1:0]    rcode0,
  output logic [FLAG_W-1:0]    rflag0,
  input  logic                 re1,
  input  logic [AW-1:0]        raddr1,
  output sdr_code_t [G-1:0]    rcode1,
  output logic [FLAG_W-1:0]    rflag1
);

  localparam int WORD_W = G * CODE_W + FLAG_W;

  logic [WORD_W-1:0] mem [DEPTH];
  logic [WORD_W-1:0] rd0, rd1;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= {wcode, wflag};
    if (re0) rd0 <= mem[raddr0];
    if (re1) rd1 <= mem[raddr1];
  end

  assign {rcode0, rflag0} = rd0;
  assign {rcode1, rflag1} = rd1;

endmodule
