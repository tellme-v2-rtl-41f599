// stream_fifo: synchronous valid/ready FIFO used as the stream channel between
// dataflow stages (the grey "stream FIFO channels" of the TLMM-FUSE unit).
// A word is written when in_valid && in_ready and read when out_valid &&
// out_ready; both may happen in the same cycle. out_data shows the head word
// combinationally, so a stage behind it sees data in the cycle after the
// write. The depth and the valid/ready handshake are this design's choice;
// the paper names the channels but not their depth.
module stream_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic wr, rd;

  assign in_ready  = (count < DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign wr = in_valid && in_ready;
  assign rd = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + $bits(count)'(wr) - $bits(count)'(rd);
    end
  end

  always_ff @(posedge clk) if (wr) mem[wr_ptr] <= in_data;

  // a full FIFO never accepts and an empty one never gives
  assert property (@(posedge clk) disable iff (!rst_n) (count == DEPTH) |-> !in_ready);
endmodule
