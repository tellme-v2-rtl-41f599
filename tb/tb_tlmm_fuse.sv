// tb_tlmm_fuse: a whole fused linear layer, n = 96 inputs (padded to 2 x 84),
// k = 32 outputs, 3 tokens, run once with each of bypass, residual add and
// SiLU-gate. The testbench holds the per-token absmax values (the channel-max
// buffer), a behavioural weight buffer with one-cycle reads, and a real-number
// reference: quantise to INT8 with 127/max, integer ternary product,
// dequantise with max/127 * wscale, then the element-wise op. Output
// back-pressure is random. Also counts the cycles of the bypass run.
module tb_tlmm_fuse;
  import tellme_pkg::*;
  import tb_fp_pkg::*;
  localparam int N = 96, K = 32, NT = 3, R = 2, NP = R * TG;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, act_valid, act_ready, y_valid, y_ready, out_valid, out_ready, w_valid;
  ew_op_e op;
  fp16_t wscale;
  fp16_vec_t act_data, y_data, out_data;
  logic [15:0] w_a, w_b;
  widx_t w_idx [Q];
  logic [9:0] max_raddr_a, max_raddr_b;
  fp16_t max_rdata_a, max_rdata_b;
  real X [NT][N], YV [NT][K], MX [NT];
  int W [NP][K];
  widx_t wmem [R][K];

  tlmm_fuse #(.K_MAX (64), .N_TOK (1024)) dut (.clk, .rst_n, .start, .cfg_n (16'(N)),
    .cfg_k (16'(K)), .cfg_tokens (16'(NT)), .cfg_op (op), .cfg_wscale (wscale), .busy, .done,
    .act_valid, .act_ready, .act_data, .y_valid, .y_ready, .y_data, .out_valid, .out_ready,
    .out_data, .w_valid, .w_a, .w_b, .w_idx, .max_raddr_a, .max_rdata_a, .max_raddr_b, .max_rdata_b);

  always_ff @(posedge clk)
    if (w_valid) for (int q = 0; q < Q; q++) w_idx[q] <= wmem[w_a / TG][w_b + q];
  assign max_rdata_a = real_to_f16(MX[max_raddr_a % NT]);
  assign max_rdata_b = real_to_f16(MX[max_raddr_b % NT]);

  function automatic real ref_out(input ew_op_e o, input int t, input int c);
    real acc, x;
    int qv;
    acc = 0.0;
    for (int i = 0; i < N; i++) begin
      x = X[t][i] * 127.0 / MX[t];
      qv = (x >= 0.0) ? int'($floor(x + 0.5)) : -int'($floor(-x + 0.5));
      if (qv > 127) qv = 127;
      if (qv < -127) qv = -127;
      acc += real'(qv * W[i][c]);
    end
    x = acc * MX[t] / 127.0 * f16_to_real(wscale);
    case (o)
      EW_ADD:  return x + YV[t][c];
      EW_SILU: return x / (1.0 + $exp(-x)) * YV[t][c];
      default: return x;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    start = 0; act_valid = 0; y_valid = 0; out_ready = 0; act_data = '0; y_data = '0;
    op = EW_BYPASS; wscale = real_to_f16(0.05);
    for (int i = 0; i < NP; i++) for (int c = 0; c < K; c++) W[i][c] = (i < N) ? int'($urandom % 3) - 1 : 0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < K; c++)
        for (int t = 0; t < T; t++) begin
          int code;
          code = 0;
          for (int g = G - 1; g >= 0; g--) code = code * 3 + (W[r*TG + t*G + g][c] + 1);
          wmem[r][c][t*B_IDX +: B_IDX] = 5'(code);
        end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      op = (pass == 0) ? EW_BYPASS : (pass == 1) ? EW_ADD : EW_SILU;
      for (int t = 0; t < NT; t++) begin
        MX[t] = 0.0;
        for (int i = 0; i < N; i++) begin
          X[t][i] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 250.0));
          if (fabs(X[t][i]) > MX[t]) MX[t] = fabs(X[t][i]);
        end
        MX[t] = f16_to_real(real_to_f16(MX[t]));
        for (int c = 0; c < K; c++) YV[t][c] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 500.0));
      end
      @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
      cyc = 0;
      fork
        for (int t = 0; t < NT; t++)
          for (int w = 0; w < N / VEC; w++) begin
            for (int i = 0; i < VEC; i++) act_data[i] = real_to_f16(X[t][w*VEC + i]);
            act_valid = 1'b1;
            @(negedge clk);
            while (!act_ready) @(negedge clk);
            @(posedge clk); #1 act_valid = 1'b0;
          end
        if (op != EW_BYPASS)
          for (int t = 0; t < NT; t++)
            for (int w = 0; w < K / VEC; w++) begin
              for (int i = 0; i < VEC; i++) y_data[i] = real_to_f16(YV[t][w*VEC + i]);
              y_valid = 1'b1;
              @(negedge clk);
              while (!y_ready) @(negedge clk);
              @(posedge clk); #1 y_valid = 1'b0;
            end
        for (int t = 0; t < NT; t++)
          for (int w = 0; w < K / VEC; w++) begin
            out_ready = (pass == 0) ? 1'b1 : 1'($urandom % 2);
            @(negedge clk);
            while (!(out_valid && out_ready)) begin
              @(posedge clk); #1 out_ready = (pass == 0) ? 1'b1 : 1'($urandom % 2); @(negedge clk);
            end
            for (int i = 0; i < VEC; i++) begin
              real want;
              want = ref_out(op, t, w*VEC + i);
              checks++;
              if (!close(f16_to_real(out_data[i]), want, 4.0/1024, 2.0 * MX[t] / 127.0 * 0.05)) begin
                failures++;
                if (failures < 6) $display("op %0d t %0d c %0d got %f want %f", op, t, w*VEC+i, f16_to_real(out_data[i]), want);
              end
            end
            @(posedge clk); #1 out_ready = 1'b0;
          end
        while (!done) begin @(posedge clk); #1 cyc++; end
      join
      checks++;
      if (busy) failures++;
      if (pass == 0) begin
        // the engine needs R*(K/Q+1) cycles per token; allow pipeline fill
        $display("bypass layer: %0d tokens in %0d cycles", NT, cyc);
        checks++;
        if (cyc > NT * (R * (K / Q + 1) + N / VEC) + 20) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
