// tb_cfg_regs: writes every register with random values and reads them back,
// checks that a CTRL write with bit 0 gives a one-cycle start pulse (and none
// while busy), and that the sticky done bit sets on done_in and clears on
// the next start.
module tb_cfg_regs;
  import tellme_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, busy, done_in, start;
  logic [2:0] addr, opcode;
  logic [31:0] wdata, rdata, len;
  logic [15:0] n, k, tokens;
  ew_op_e ew_op;
  proj_e proj;
  fp16_t wscale;
  int starts = 0;
  cfg_regs dut (.*);
  always @(negedge clk) if (start) starts++;

  task automatic wr(input logic [2:0] a, input logic [31:0] d);
    we = 1; addr = a; wdata = d;
    @(posedge clk); #1 we = 0;
  endtask
  task automatic chk(input logic [2:0] a, input logic [31:0] want);
    addr = a; #1;
    checks++;
    if (rdata != want) begin failures++; $display("reg %0d got %h want %h", a, rdata, want); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [31:0] v;
    we = 0; busy = 0; done_in = 0; addr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      v = $urandom;
      wr(3'd2, v); chk(3'd2, {16'd0, v[15:0]}); checks++; if (n != v[15:0]) begin failures++; $display("fail line %0d", `__LINE__); end
      v = $urandom;
      wr(3'd3, v); chk(3'd3, {16'd0, v[15:0]}); checks++; if (k != v[15:0]) begin failures++; $display("fail line %0d", `__LINE__); end
      v = $urandom;
      wr(3'd4, v); chk(3'd4, {16'd0, v[15:0]}); checks++; if (tokens != v[15:0]) begin failures++; $display("fail line %0d", `__LINE__); end
      v = $urandom;
      wr(3'd5, v); chk(3'd5, {28'd0, v[3:0]});
      checks++; if (ew_op != ew_op_e'(v[1:0]) || proj != proj_e'(v[3:2])) begin failures++; $display("fail line %0d", `__LINE__); end
      v = $urandom;
      wr(3'd6, v); chk(3'd6, {16'd0, v[15:0]}); checks++; if (wscale != v[15:0]) begin failures++; $display("fail line %0d", `__LINE__); end
      v = $urandom;
      wr(3'd7, v); chk(3'd7, v); checks++; if (len != v) begin failures++; $display("fail line %0d", `__LINE__); end
    end
    // start pulse
    wr(3'd0, {28'd0, 3'(OP_LINEAR), 1'b1});
    checks++; if (!start || opcode != 3'(OP_LINEAR)) begin failures++; $display("fail line %0d", `__LINE__); end
    @(posedge clk); #1;
    checks++; if (start) begin failures++; $display("fail line %0d", `__LINE__); end
    @(posedge clk); #1;
    checks++; if (starts != 1) failures++;        // one cycle only
    busy = 1;
    wr(3'd0, {28'd0, 3'(OP_RMS), 1'b1});
    checks++; if (starts != 1) failures++;        // ignored while busy
    chk(3'd1, 32'h1);
    done_in = 1; @(posedge clk); #1 done_in = 0; busy = 0;
    chk(3'd1, 32'h2);
    repeat (3) @(posedge clk); #1;
    chk(3'd1, 32'h2);                             // sticky
    wr(3'd0, {28'd0, 3'(OP_DECODE), 1'b1});
    chk(3'd1, 32'h0);
    chk(3'd0, {28'd0, 3'(OP_DECODE), 1'b0});
    @(posedge clk); #1;
    checks++; if (starts != 2) begin failures++; $display("fail line %0d", `__LINE__); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
