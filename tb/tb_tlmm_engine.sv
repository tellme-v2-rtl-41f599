// tb_tlmm_engine: random INT8 activations and ternary weights; the weights are
// encoded into 5-bit group indices by the testbench and served from a
// behavioural one-cycle-latency memory. Results are compared with a direct
// integer matrix product. Run 1 keeps the output ready and checks the cycle
// count R*(k/Q+1) per token; run 2 applies random back-pressure.
module tb_tlmm_engine;
  import tellme_pkg::*;
  localparam int R = 2, KQ = 3, NTOK = 3;
  localparam int N = R * TG, K = KQ * Q;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, act_valid, act_ready, wreq_valid, out_valid, out_ready;
  int8_tg_t act_data;
  logic [15:0] wreq_a, wreq_b;
  widx_t wrsp_idx [Q];
  int32_vec_t out_data;

  tlmm_engine #(.K_MAX(64)) dut (
    .clk, .rst_n, .start, .cfg_rows (16'(R)), .cfg_kq (16'(KQ)), .cfg_tokens (16'(NTOK)),
    .busy, .done, .act_valid, .act_ready, .act_data, .wreq_valid, .wreq_a, .wreq_b,
    .wrsp_idx, .out_valid, .out_ready, .out_data
  );

  int W [N][K];
  int A [NTOK][N];
  widx_t wmem [R][K];

  // behavioural weight buffer, one-cycle read
  always_ff @(posedge clk)
    if (wreq_valid)
      for (int q = 0; q < Q; q++) wrsp_idx[q] <= wmem[wreq_a / TG][wreq_b + q];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit bp);
    int tok, col, cyc;
    fork
      begin   // feed activations
        for (int t = 0; t < NTOK; t++)
          for (int r = 0; r < R; r++) begin
            act_valid = 1'b1;
            for (int i = 0; i < TG; i++) act_data[i] = 8'(A[t][r*TG + i]);
            @(posedge clk);
            while (!act_ready) @(posedge clk);
            #1 act_valid = 1'b0;
          end
      end
      begin   // collect results
        tok = 0; col = 0; cyc = 0;
        while (tok < NTOK) begin
          out_ready = bp ? 1'($urandom % 2) : 1'b1;
          @(posedge clk);
          cyc++;
          if (out_valid && out_ready) begin
            for (int q = 0; q < Q; q++) begin
              int want;
              want = 0;
              for (int n = 0; n < N; n++) want += A[tok][n] * W[n][col*Q + q];
              checks++;
              if (out_data[q] != want) begin
                failures++;
                if (failures < 5) $display("tok %0d col %0d got %0d want %0d", tok, col*Q+q, out_data[q], want);
              end
            end
            col++;
            if (col == KQ) begin col = 0; tok++; end
          end
          #1;
        end
        if (!bp) begin
          checks++;
          // R*(KQ+1) cycles per token, plus the start cycle and 2 drain cycles
          if (cyc > NTOK * R * (KQ + 1) + 4) begin
            failures++; $display("too slow: %0d cycles", cyc);
          end
          $display("run took %0d cycles for %0d tokens", cyc, NTOK);
        end
      end
    join
  endtask

  initial begin
    start = 0; act_valid = 0; out_ready = 1; act_data = '0;
    for (int n = 0; n < N; n++) for (int k = 0; k < K; k++) W[n][k] = int'($urandom % 3) - 1;
    for (int t = 0; t < NTOK; t++) for (int n = 0; n < N; n++) A[t][n] = int'($urandom % 256) - 128;
    for (int r = 0; r < R; r++)
      for (int k = 0; k < K; k++)
        for (int t = 0; t < T; t++) begin
          int code;
          code = 0;
          for (int g = G - 1; g >= 0; g--) code = code * 3 + (W[r*TG + t*G + g][k] + 1);
          wmem[r][k][t*B_IDX +: B_IDX] = 5'(code);
        end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      @(posedge clk); #1 start = 1; @(posedge clk); #1 start = 0;
      run(pass == 1);
      repeat (5) @(posedge clk);
      checks++;
      if (busy) begin failures++; $display("still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
