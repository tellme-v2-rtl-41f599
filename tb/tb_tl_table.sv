// tb_tl_table: fills the TL table from random INT8 activations and checks
// every entry, read through all Q ports, against sum_g w_g*a[g] worked out
// from the base-3 digits of the index (digit 0 -> -1, 1 -> 0, 2 -> +1).
module tb_tl_table;
  import tellme_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic load;
  logic signed [7:0] act [G];
  logic [B_IDX-1:0] idx [Q];
  logic signed [B_TB-1:0] val [Q];

  tl_table dut (.clk (clk), .load (load), .act (act), .idx (idx), .val (val));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int la [G];
    load = 1'b0;
    for (int q = 0; q < Q; q++) idx[q] = '0;
    for (int g = 0; g < G; g++) act[g] = '0;
    for (int round = 0; round < 20; round++) begin
      @(negedge clk);
      for (int g = 0; g < G; g++) act[g] = 8'($urandom);
      if (round == 0) for (int g = 0; g < G; g++) act[g] = -8'sd128;
      if (round == 1) for (int g = 0; g < G; g++) act[g] = 8'sd127;
      for (int g = 0; g < G; g++) la[g] = int'(act[g]);
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      for (int g = 0; g < G; g++) act[g] = 8'($urandom);   // must not matter now
      for (int base = 0; base < 32; base += Q) begin
        for (int q = 0; q < Q; q++) idx[q] = 5'((base + q + round) % 32);
        #1;
        for (int q = 0; q < Q; q++) begin
          int e, want, r;
          e = int'(idx[q]);
          want = 0;
          r = e;
          if (e < 27)
            for (int g = 0; g < G; g++) begin
              want += ((r % 3) - 1) * la[g];
              r = r / 3;
            end
          checks++;
          if (int'(val[q]) != want) begin
            failures++;
            if (failures < 5) $display("idx %0d got %0d want %0d", e, val[q], want);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
