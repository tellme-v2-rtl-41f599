// tb_rpa: reversed prefill attention on a 10-token prompt with 2 heads of 32
// and 4 PEs (so 3 batches, the last one with 2 queries). Queries, keys and
// values are streamed in the reversed address order the unit asks for
// (address a = token N-1-a; batch b reads queries from address 4b and
// keys/values from 4b upward). Each output is compared with real-number
// causal softmax attention. Checks the burst descriptors (q_off/kv_off/
// kv_len), that the cycle count matches KMAC + SMAX + VACC per key, and how
// many key steps each PE skipped (the causal mask).
module tb_rpa;
  import tellme_pkg::*;
  import tb_fp_pkg::*;
  localparam int NPE = 4, NH = 2, DH = 32, DM = NH * DH, NW = DM / VEC, N = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, q_valid, q_ready, k_valid, k_ready, v_valid, v_ready, out_valid, out_ready;
  logic [15:0] q_off, q_len, kv_off, kv_len;
  fp16_vec_t q_data, k_data, v_data, out_data;
  real QR [N][DM], KR [N][DM], VR [N][DM], OR [N][DM];
  int cyc = 0, skips = 0;

  rpa #(.N_PE (NPE), .NH (NH), .DH (DH)) dut (.clk, .rst_n, .start, .cfg_n (16'(N)), .busy, .done,
    .q_off, .q_len, .kv_off, .kv_len, .q_valid, .q_ready, .q_data, .k_valid, .k_ready, .k_data,
    .v_valid, .v_ready, .v_data, .out_valid, .out_ready, .out_data);

  // count PE key steps skipped by the causal mask (one per PE per skipped key)
  always @(negedge clk)
    if (rst_n && k_valid && k_ready && dut.w == 0)
      for (int p = 0; p < NPE; p++)
        if (p < int'(q_len) && int'(dut.jj) < p) skips++;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, want_cyc;
    for (int i = 0; i < N; i++)
      for (int d = 0; d < DM; d++) begin
        QR[i][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 400.0));
        KR[i][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 400.0));
        VR[i][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
      end
    for (int i = 0; i < N; i++)
      for (int h = 0; h < NH; h++) begin
        real s [N];
        real m, l;
        m = -1e30; l = 0.0;
        for (int j = 0; j <= i; j++) begin
          s[j] = 0.0;
          for (int d = 0; d < DH; d++) s[j] += QR[i][h*DH+d] * KR[j][h*DH+d];
          s[j] = s[j] / $sqrt(DH);
          if (s[j] > m) m = s[j];
        end
        for (int j = 0; j <= i; j++) l += $exp(s[j] - m);
        for (int d = 0; d < DH; d++) begin
          OR[i][h*DH+d] = 0.0;
          for (int j = 0; j <= i; j++) OR[i][h*DH+d] += $exp(s[j] - m) / l * VR[j][h*DH+d];
        end
      end
    // ideal cycles: per batch q_len*NW load, kv_len*(2*NW+NH) keys, q_len*NW out
    want_cyc = 0;
    for (int b0 = 0; b0 < N; b0 += NPE) begin
      int ql;
      ql = (N - b0 < NPE) ? N - b0 : NPE;
      want_cyc += 2 * ql * NW + (N - b0) * (2 * NW + NH);
    end
    start = 0; q_valid = 0; k_valid = 0; v_valid = 0; out_ready = 1;
    q_data = '0; k_data = '0; v_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    start = 1; t0 = cyc; @(posedge clk); #1 start = 0;
    fork
      for (int b0 = 0; b0 < N; b0 += NPE) begin
        int ql;
        ql = (N - b0 < NPE) ? N - b0 : NPE;
        for (int p = 0; p < ql; p++)
          for (int w = 0; w < NW; w++) begin
            for (int e = 0; e < VEC; e++) q_data[e] = real_to_f16(QR[N-1-b0-p][w*VEC+e]);
            q_valid = 1'b1;
            @(negedge clk);
            while (!q_ready) @(negedge clk);
            if (p == 0 && w == 0) begin
              checks += 3;
              if (q_off != 16'(b0) || kv_off != 16'(b0) || kv_len != 16'(N - b0)) begin
                failures++; $display("descriptors %0d %0d %0d at b0 %0d", q_off, kv_off, kv_len, b0);
              end
            end
            @(posedge clk); #1 q_valid = 1'b0;
          end
      end
      for (int b0 = 0; b0 < N; b0 += NPE)
        for (int jj = 0; jj < N - b0; jj++)
          for (int w = 0; w < NW; w++) begin
            for (int e = 0; e < VEC; e++) k_data[e] = real_to_f16(KR[N-1-b0-jj][w*VEC+e]);
            k_valid = 1'b1;
            @(negedge clk);
            while (!k_ready) @(negedge clk);
            @(posedge clk); #1 k_valid = 1'b0;
          end
      for (int b0 = 0; b0 < N; b0 += NPE)
        for (int jj = 0; jj < N - b0; jj++)
          for (int w = 0; w < NW; w++) begin
            for (int e = 0; e < VEC; e++) v_data[e] = real_to_f16(VR[N-1-b0-jj][w*VEC+e]);
            v_valid = 1'b1;
            @(negedge clk);
            while (!v_ready) @(negedge clk);
            @(posedge clk); #1 v_valid = 1'b0;
          end
      for (int b0 = 0; b0 < N; b0 += NPE) begin
        int ql;
        ql = (N - b0 < NPE) ? N - b0 : NPE;
        for (int p = 0; p < ql; p++)
          for (int w = 0; w < NW; w++) begin
            @(negedge clk);
            while (!out_valid) @(negedge clk);
            for (int e = 0; e < VEC; e++) begin
              checks++;
              if (!close(f16_to_real(out_data[e]), OR[N-1-b0-p][w*VEC+e], 4.0/1024, 3e-3)) begin
                failures++;
                if (failures < 6) $display("tok %0d d %0d got %f want %f", N-1-b0-p, w*VEC+e,
                                           f16_to_real(out_data[e]), OR[N-1-b0-p][w*VEC+e]);
              end
            end
            @(posedge clk); #1;
          end
      end
      begin
        while (!done) begin @(posedge clk); #1; end
        t1 = cyc;
      end
    join
    // PE p of a batch with q_len > p skips p keys
    begin
      int want_sk;
      want_sk = 0;
      for (int b0 = 0; b0 < N; b0 += NPE)
        for (int p = 0; p < NPE; p++) if (p < N - b0) want_sk += p;
      checks++;
      if (skips != want_sk) begin failures++; $display("skips %0d want %0d", skips, want_sk); end
    end
    checks++;
    $display("rpa: %0d cycles (ideal %0d), %0d causal skips", t1 - t0, want_cyc, skips);
    if (t1 - t0 > want_cyc + 3 * (N / NPE + 1) + 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
