// tb_da: decode attention of one query against a 40-token cache, 2 heads of
// 32. The K pass and V pass streams are driven in token order; the output is
// compared with real-number softmax attention. Checks that the run takes
// NW + 2*N*NW + NW cycles (q load, two passes, write-out), and runs twice
// to check that state is cleared between tokens.
module tb_da;
  import tellme_pkg::*;
  import tb_fp_pkg::*;
  localparam int NH = 2, DH = 32, DM = NH * DH, NW = DM / VEC, N = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, q_valid, q_ready, k_valid, k_ready, v_valid, v_ready, out_valid, out_ready;
  fp16_vec_t q_data, k_data, v_data, out_data;
  real QR [DM], KR [N][DM], VR [N][DM], OR [DM];
  int cyc = 0;
  da #(.N_CTX (64), .NH (NH), .DH (DH)) dut (.clk, .rst_n, .start, .cfg_n (16'(N)), .busy, .done,
    .q_valid, .q_ready, .q_data, .k_valid, .k_ready, .k_data, .v_valid, .v_ready, .v_data,
    .out_valid, .out_ready, .out_data);
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    start = 0; q_valid = 0; k_valid = 0; v_valid = 0; out_ready = 1;
    q_data = '0; k_data = '0; v_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      for (int d = 0; d < DM; d++) QR[d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 300.0));
      for (int j = 0; j < N; j++)
        for (int d = 0; d < DM; d++) begin
          KR[j][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 300.0));
          VR[j][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
        end
      for (int h = 0; h < NH; h++) begin
        real s [N];
        real m, l;
        m = -1e30; l = 0.0;
        for (int j = 0; j < N; j++) begin
          s[j] = 0.0;
          for (int d = 0; d < DH; d++) s[j] += QR[h*DH+d] * KR[j][h*DH+d];
          s[j] = s[j] / $sqrt(DH);
          if (s[j] > m) m = s[j];
        end
        for (int j = 0; j < N; j++) l += $exp(s[j] - m);
        for (int d = 0; d < DH; d++) begin
          OR[h*DH+d] = 0.0;
          for (int j = 0; j < N; j++) OR[h*DH+d] += $exp(s[j] - m) / l * VR[j][h*DH+d];
        end
      end
      @(posedge clk); #1 start = 1; t0 = cyc; @(posedge clk); #1 start = 0;
      fork
        for (int w = 0; w < NW; w++) begin
          for (int e = 0; e < VEC; e++) q_data[e] = real_to_f16(QR[w*VEC+e]);
          q_valid = 1'b1;
          @(negedge clk); while (!q_ready) @(negedge clk);
          @(posedge clk); #1 q_valid = 1'b0;
        end
        for (int j = 0; j < N; j++)
          for (int w = 0; w < NW; w++) begin
            for (int e = 0; e < VEC; e++) k_data[e] = real_to_f16(KR[j][w*VEC+e]);
            k_valid = 1'b1;
            @(negedge clk); while (!k_ready) @(negedge clk);
            @(posedge clk); #1 k_valid = 1'b0;
          end
        for (int j = 0; j < N; j++)
          for (int w = 0; w < NW; w++) begin
            for (int e = 0; e < VEC; e++) v_data[e] = real_to_f16(VR[j][w*VEC+e]);
            v_valid = 1'b1;
            @(negedge clk); while (!v_ready) @(negedge clk);
            @(posedge clk); #1 v_valid = 1'b0;
          end
        for (int w = 0; w < NW; w++) begin
          @(negedge clk); while (!out_valid) @(negedge clk);
          for (int e = 0; e < VEC; e++) begin
            checks++;
            if (!close(f16_to_real(out_data[e]), OR[w*VEC+e], 4.0/1024, 3e-3)) begin
              failures++;
              if (failures < 6) $display("d %0d got %f want %f", w*VEC+e, f16_to_real(out_data[e]), OR[w*VEC+e]);
            end
          end
          @(posedge clk); #1;
        end
        begin while (!done) begin @(posedge clk); #1; end t1 = cyc; end
      join
      checks++;
      $display("da: %0d cycles for a %0d-token context (ideal %0d)", t1 - t0, N, 2*NW + 2*N*NW);
      if (t1 - t0 > 2*NW + 2*N*NW + 4) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
