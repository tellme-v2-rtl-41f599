// tb_int8_quant: streams tokens of random FP16 values (n = 176, not a
// multiple of 84, so the last vector of each token is zero padded) with a
// per-token scale and checks every INT8 output against round(x*scale)
// saturated to +/-127, worked out with real arithmetic, and the vector count
// ceil(n/84) per token. Output back-pressure is random.
module tb_int8_quant;
  import tellme_pkg::*;
  import tb_fp_pkg::*;
  localparam int NN = 176, NTOK = 3;
  localparam int NV = (NN + TG - 1) / TG;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, in_valid, in_ready, out_valid, out_ready;
  fp32_t inv_scale;
  logic [15:0] tok_idx;
  fp16_vec_t in_data;
  int8_tg_t out_data;
  real X [NTOK][NN];
  real SC [NTOK];

  int8_quant dut (.clk, .rst_n, .cfg_n (16'(NN)), .clear, .inv_scale, .tok_idx,
                  .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);
  assign inv_scale = real_to_f32(SC[tok_idx % NTOK]);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NTOK; t++) begin
      SC[t] = 127.0 / (1.0 + t);
      for (int i = 0; i < NN; i++) X[t][i] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 900.0 * (1.0 + t)));
      X[t][0] = 1.0 + t;   // the absmax itself maps to 127
    end
    clear = 0; in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    fork
      for (int t = 0; t < NTOK; t++)
        for (int w = 0; w < NN / VEC; w++) begin
          for (int e = 0; e < VEC; e++) in_data[e] = real_to_f16(X[t][w*VEC + e]);
          in_valid = 1;
          @(negedge clk);
          while (!in_ready) @(negedge clk);
          @(posedge clk); #1 in_valid = 0;
        end
      for (int t = 0; t < NTOK; t++)
        for (int v = 0; v < NV; v++) begin
          out_ready = 1'($urandom % 2);
          @(negedge clk);
          while (!(out_valid && out_ready)) begin @(posedge clk); #1 out_ready = 1'($urandom % 2); @(negedge clk); end
          for (int i = 0; i < TG; i++) begin
            int want, idx;
            real r;
            idx = v * TG + i;
            if (idx < NN) begin
              r = X[t][idx] * SC[t];
              want = (r >= 0.0) ? int'($floor(r + 0.5)) : -int'($floor(-r + 0.5));
              if (want > 127) want = 127;
              if (want < -127) want = -127;
            end else want = 0;
            checks++;
            if (int'(out_data[i]) != want && !(want != 0 && (int'(out_data[i]) - want == 1 || want - int'(out_data[i]) == 1))) begin
              failures++;
              if (failures < 5) $display("tok %0d elem %0d got %0d want %0d", t, idx, out_data[i], want);
            end
          end
          @(posedge clk); #1 out_ready = 0;
        end
    join
    checks++;
    if (tok_idx != NTOK) begin failures++; $display("tok_idx %0d", tok_idx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
