// tb_fp16_dequant: random INT32 words times a per-token scale, compared with
// the real-number product rounded to FP16 (tolerance 2^-10 relative), under
// random back-pressure; also checks the token counter.
module tb_fp16_dequant;
  import tellme_pkg::*;
  import tb_fp_pkg::*;
  localparam int KW = 3, NTOK = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, in_valid, in_ready, out_valid, out_ready;
  fp32_t scale;
  logic [15:0] tok_idx;
  int32_vec_t in_data;
  fp16_vec_t out_data;
  int X [NTOK*KW][VEC];
  fp16_dequant dut (.clk, .rst_n, .clear, .cfg_kw (16'(KW)), .scale, .tok_idx,
                    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);
  function automatic real sc(input int t); return 0.013 * (t + 1); endfunction
  assign scale = real_to_f32(sc(tok_idx));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < NTOK*KW; w++) for (int e = 0; e < VEC; e++) X[w][e] = int'($urandom % 200001) - 100000;
    clear = 0; in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    fork
      for (int w = 0; w < NTOK*KW; w++) begin
        for (int e = 0; e < VEC; e++) in_data[e] = X[w][e];
        in_valid = 1;
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        @(posedge clk); #1 in_valid = 0;
      end
      for (int w = 0; w < NTOK*KW; w++) begin
        out_ready = 1'($urandom % 2);
        @(negedge clk);
        while (!(out_valid && out_ready)) begin @(posedge clk); #1 out_ready = 1'($urandom % 2); @(negedge clk); end
        for (int e = 0; e < VEC; e++) begin
          real want;
          want = real'(X[w][e]) * sc(w / KW);
          checks++;
          if (!close(f16_to_real(out_data[e]), want, 1.0/1024, 1e-3)) begin
            failures++;
            if (failures < 5) $display("w %0d e %0d got %f want %f", w, e, f16_to_real(out_data[e]), want);
          end
        end
        @(posedge clk); #1 out_ready = 0;
      end
    join
    checks++;
    if (tok_idx != NTOK) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
