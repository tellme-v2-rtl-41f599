// tb_stream_fifo: pushes 2000 random words through a 4-deep FIFO with random
// valid and ready, checks order against a queue model, that count never
// exceeds DEPTH, and that back-to-back streaming runs at one word per cycle.
module tb_stream_fifo;
  localparam int W = 32, D = 4, N = 2000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q [$];
  int sent = 0, got = 0, cyc = 0;
  logic burst = 1'b1;
  stream_fifo #(.WIDTH (W), .DEPTH (D)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample both handshakes at the edge, then drive new values
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || q[0] != out_data) failures++;
      if (q.size() != 0) void'(q.pop_front());
      got++;
    end
    checks++;
    if (count > D) failures++;
  end

  initial begin
    int t0;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // phase 1: full rate, 100 words must take about 100 cycles
    t0 = cyc;
    while (sent < 100) begin
      in_valid = 1; out_ready = 1; in_data = $urandom;
      @(posedge clk); #1;
    end
    in_valid = 0;
    checks++;
    if (cyc - t0 > 102) begin failures++; $display("streaming took %0d cycles", cyc - t0); end
    // phase 2: random
    while (sent < N) begin
      if (!(in_valid && !in_ready)) begin in_valid = 1'($urandom % 2); in_data = $urandom; end
      out_ready = 1'($urandom % 3 != 0);
      @(posedge clk); #1;
    end
    in_valid = 0; out_ready = 1;
    while (got < sent) begin @(posedge clk); #1; end
    checks++;
    if (q.size() != 0 || count != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
