// tb_chan_max_buf: writes random FP16 maxima to random token slots and reads
// them back on both ports against a model array (reads are combinational,
// writes take effect after the clock edge).
module tb_chan_max_buf;
  import tellme_pkg::*;
  localparam int NT = 1024;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we;
  logic [9:0] waddr, raddr_a, raddr_b;
  fp16_t wdata, rdata_a, rdata_b;
  fp16_t model [NT];
  logic  known [NT];
  chan_max_buf #(.N_TOK (NT)) dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < NT; i++) known[i] = 1'b0;
    we = 0; waddr = 0; wdata = 0; raddr_a = 0; raddr_b = 0;
    @(posedge clk); #1;
    for (int i = 0; i < NT; i++) begin
      we = 1; waddr = 10'(i); wdata = 16'($urandom);
      model[i] = wdata; known[i] = 1'b1;
      @(posedge clk); #1;
    end
    for (int it = 0; it < 5000; it++) begin
      we = 1'($urandom % 2); waddr = 10'($urandom); wdata = 16'($urandom);
      raddr_a = 10'($urandom); raddr_b = 10'($urandom);
      #1;
      checks += 2;
      if (rdata_a != model[raddr_a]) failures++;
      if (rdata_b != model[raddr_b]) failures++;
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
