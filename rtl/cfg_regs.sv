// cfg_regs: configuration registers written by the host over a simple
// register bus (the paper's Config REG behind the AXI slave port; the bus
// protocol here is this design's choice: one write or read per cycle, read
// data combinational).
//   0 CTRL    w: bit0 = start, bits 3:1 = opcode   r: opcode
//   1 STATUS  r: bit0 = busy, bit1 = done (sticky, cleared by start)
//   2 N       input elements per token / sequence length for attention
//   3 K       output elements per token
//   4 TOKENS  tokens in this command
//   5 MODE    bits 1:0 element-wise op, bits 3:2 projection kind
//   6 WSCALE  FP16 weight scale of the ternary layer
//   7 LEN     weight-load length in 768-bit beats
module cfg_regs
  import tellme_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [2:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  input  logic        busy,
  input  logic        done_in,
  output logic        start,
  output logic [2:0]  opcode,
  output logic [15:0] n,
  output logic [15:0] k,
  output logic [15:0] tokens,
  output ew_op_e      ew_op,
  output proj_e       proj,
  output fp16_t       wscale,
  output logic [31:0] len
);
  logic done_q;
  logic [3:0] mode;
  assign ew_op = ew_op_e'(mode[1:0]);
  assign proj  = proj_e'(mode[3:2]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start <= 1'b0; opcode <= '0; n <= '0; k <= '0; tokens <= '0;
      mode <= '0; wscale <= '0; len <= '0; done_q <= 1'b0;
    end else begin
      start <= 1'b0;
      if (done_in) done_q <= 1'b1;
      if (we) begin
        unique case (addr)
          3'd0: begin
            opcode <= wdata[3:1];
            if (wdata[0] && !busy) begin start <= 1'b1; done_q <= 1'b0; end
          end
          3'd2: n      <= wdata[15:0];
          3'd3: k      <= wdata[15:0];
          3'd4: tokens <= wdata[15:0];
          3'd5: mode   <= wdata[3:0];
          3'd6: wscale <= wdata[15:0];
          3'd7: len    <= wdata;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (addr)
      3'd0: rdata = {28'd0, opcode, 1'b0};
      3'd1: rdata = {30'd0, done_q, busy};
      3'd2: rdata = {16'd0, n};
      3'd3: rdata = {16'd0, k};
      3'd4: rdata = {16'd0, tokens};
      3'd5: rdata = {28'd0, mode};
      3'd6: rdata = {16'd0, wscale};
      default: rdata = len;
    endcase
  end
endmodule
