// tb_rms_max: RMSNorm + absmax on 3 tokens of 64 elements (NMAX = 64) with
// random weights. Checks each output against the real-number
// x / sqrt(mean(x^2) + 1e-5) * w, each token's maximum written to the
// channel-max port, the done pulse, and that with a free output the run
// takes about 2*n/16 + 2 cycles per token (the read / denominator / write
// phases of the paper's RMS-MAX unit).
module tb_rms_max;
  import tellme_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 64, NT = 3, NW = N / VEC;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, in_valid, in_ready, out_valid, out_ready, max_we;
  fp16_vec_t in_data, w_data, out_data;
  logic [1:0] w_addr;
  logic [9:0] max_addr;
  fp16_t max_data;
  real X [NT][N], WT [N], Y [NT][N], MX [NT];
  int nmax = 0, cyc = 0, t_start, t_done = -1;

  rms_max #(.NMAX (N), .N_TOK (1024)) dut (.clk, .rst_n, .start, .cfg_n (16'(N)),
    .cfg_tokens (16'(NT)), .busy, .done, .in_valid, .in_ready, .in_data, .w_addr, .w_data,
    .out_valid, .out_ready, .out_data, .max_we, .max_addr, .max_data);

  always_comb for (int i = 0; i < VEC; i++) w_data[i] = real_to_f16(WT[int'(w_addr) * VEC + i]);

  always @(posedge clk) begin
    cyc++;
    if (done) t_done = cyc;
  end
  always @(negedge clk) begin
    if (rst_n && max_we) begin
      checks++;
      if (int'(max_addr) != nmax || !close(f16_to_real(max_data), MX[nmax], 2.0/1024, 1e-3)) begin
        failures++;
        $display("max tok %0d addr %0d got %f want %f", nmax, max_addr, f16_to_real(max_data), MX[nmax]);
      end
      nmax++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) WT[i] = f16_to_real(real_to_f16(0.5 + real'($urandom % 1000) / 1000.0));
    for (int t = 0; t < NT; t++) begin
      real ss, r;
      ss = 0.0;
      for (int i = 0; i < N; i++) begin
        X[t][i] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 100.0 * (t + 1)));
        ss += X[t][i] * X[t][i];
      end
      r = $sqrt(ss / N + 1e-5);
      MX[t] = 0.0;
      for (int i = 0; i < N; i++) begin
        Y[t][i] = X[t][i] / r * WT[i];
        if (fabs(Y[t][i]) > MX[t]) MX[t] = fabs(Y[t][i]);
      end
    end
    start = 0; in_valid = 0; out_ready = 1; in_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    start = 1; t_start = cyc; @(posedge clk); #1 start = 0;
    fork
      for (int t = 0; t < NT; t++)
        for (int w = 0; w < NW; w++) begin
          for (int i = 0; i < VEC; i++) in_data[i] = real_to_f16(X[t][w*VEC + i]);
          in_valid = 1'b1;
          @(negedge clk);
          while (!in_ready) @(negedge clk);
          @(posedge clk); #1 in_valid = 1'b0;
        end
      for (int t = 0; t < NT; t++)
        for (int w = 0; w < NW; w++) begin
          @(negedge clk);
          while (!out_valid) @(negedge clk);
          for (int i = 0; i < VEC; i++) begin
            checks++;
            if (!close(f16_to_real(out_data[i]), Y[t][w*VEC + i], 3.0/1024, 2e-3)) begin
              failures++;
              if (failures < 6) $display("t %0d i %0d got %f want %f", t, w*VEC+i, f16_to_real(out_data[i]), Y[t][w*VEC+i]);
            end
          end
          @(posedge clk); #1;
        end
    join
    repeat (3) @(posedge clk);
    checks += 3;
    if (nmax != NT) failures++;
    if (t_done < 0) failures++;
    if (t_done - t_start > NT * (2 * NW + 2) + 3) begin
      failures++; $display("took %0d cycles", t_done - t_start);
    end
    $display("rms_max: %0d tokens in %0d cycles", NT, t_done - t_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
