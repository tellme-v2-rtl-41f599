// chan_max_buf: the channel-wise maximum buffer between the RMS-MAX unit and
// the TLMM-FUSE unit. Entry t holds absmax of the normalised token t, written
// by RMS-MAX once the token is finished and read by the quantiser (port a)
// and the dequantiser (port b), which may be working on different tokens.
// Reads are combinational, the write lands at the clock edge. Depth
// (N_TOK = 1024 tokens of one prefill) is this design's choice.
module chan_max_buf
  import tellme_pkg::*;
#(
  parameter int unsigned N_TOK = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(N_TOK)-1:0] waddr,
  input  fp16_t                    wdata,
  input  logic [$clog2(N_TOK)-1:0] raddr_a,
  output fp16_t                    rdata_a,
  input  logic [$clog2(N_TOK)-1:0] raddr_b,
  output fp16_t                    rdata_b
);
  fp16_t mem [N_TOK];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
endmodule
