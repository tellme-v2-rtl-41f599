// tb_tellme_top: end-to-end test of the accelerator at its default sizes
// (d_model = 1536, 16 heads of 96, T = 28, G = 3, Q = 16, 8 RPA PEs).
// The host side is modelled by register writes; the DDR side by queues that
// feed the s0/s1/s2/w streams and collect the o stream. Sequence:
//   1. WLOAD   : a full d_model x d_model ternary layer (19 x 1536 index
//                vectors, 5 per 768-bit beat) plus 1536 RMSNorm weights
//   2. RMS     : RMSNorm + absmax of 2 tokens; absmax goes to the max buffer
//   3. LINEAR  : the RMSNorm output through the loaded layer, once with each
//                element-wise op (bypass, residual add, SiLU-gate, RoPE); the
//                add run has random output back-pressure
//   4. PREFILL : causal attention over a 10-token prompt (two batches, the
//                second one partial), streams in reversed order
//   5. DECODE  : one query against a 12-token cache
// Every result is compared with a real-number reference. The testbench
// counts each mechanism: weight beats, RMS weights loaded, max-buffer
// writes, each element-wise mode, zero-padded input slices, output stalls,
// causal skips, partial prefill batches, decode runs and done interrupts;
// one that never happened is a failure. Cycle counts of the linear layer are
// checked against rows*(k/16+1) per token, the look-up rate of the engine.
module tb_tellme_top;
  import tellme_pkg::*;
  import tb_fp_pkg::*;
  localparam int DM = D_MODEL, NW = DM / VEC, NTK = 2, YR = D_MODEL_P / TG;
  localparam int NPRE = 10, NDEC = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we, irq_done;
  logic [2:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic s0_valid, s0_ready, s1_valid, s1_ready, s2_valid, s2_ready, w_valid, w_ready, o_valid, o_ready;
  fp16_vec_t s0_data, s1_data, s2_data, o_data;
  logic [767:0] w_data;
  logic [2:0] w_nvec;
  logic w_rms;
  logic [15:0] rpa_q_off, rpa_q_len, rpa_kv_off, rpa_kv_len;

  tellme_top dut (.*);

  // ---------------- DDR-side stream models ----------------
  fp16_vec_t q0 [$], q1 [$], q2 [$], oq [$];
  typedef struct packed { logic [767:0] d; logic [2:0] n; logic r; } beat_t;
  beat_t wq [$];
  logic f0, f1, f2, fw, fo;
  bit bp = 0;                     // random output back-pressure
  int n_beats = 0, n_stall = 0, n_irq = 0, n_maxw = 0, n_skip = 0, n_partial = 0, n_pad = 0;

  always @(negedge clk) begin
    f0 = s0_valid && s0_ready; f1 = s1_valid && s1_ready; f2 = s2_valid && s2_ready;
    fw = w_valid && w_ready;   fo = o_valid && o_ready;
    if (fo) oq.push_back(o_data);
    if (rst_n && o_valid && !o_ready) n_stall++;
    if (rst_n && irq_done) n_irq++;
    if (rst_n && dut.max_we) n_maxw++;
    if (rst_n && fw) n_beats++;
    if (rst_n && dut.u_rpa.k_valid && dut.u_rpa.k_ready && dut.u_rpa.w == 0)
      for (int p = 0; p < 8; p++) if (p < int'(rpa_q_len) && int'(dut.u_rpa.jj) < p) n_skip++;
    if (rst_n && dut.u_rpa.q_valid && dut.u_rpa.q_ready && dut.u_rpa.w == 0 && dut.u_rpa.pe == 0
        && rpa_q_len < 8) n_partial++;
    if (rst_n && dut.u_fuse.q_valid && dut.u_fuse.q_ready && dut.u_fuse.q_data[TG-1] == 0
        && dut.u_fuse.u_quant.tok_end) n_pad++;
  end
  always @(posedge clk) begin
    #1;
    if (f0) void'(q0.pop_front());
    if (f1) void'(q1.pop_front());
    if (f2) void'(q2.pop_front());
    if (fw) void'(wq.pop_front());
    f0 = 0; f1 = 0; f2 = 0; fw = 0;
    s0_valid = q0.size() != 0; if (s0_valid) s0_data = q0[0];
    s1_valid = q1.size() != 0; if (s1_valid) s1_data = q1[0];
    s2_valid = q2.size() != 0; if (s2_valid) s2_data = q2[0];
    w_valid  = wq.size() != 0;
    if (w_valid) begin w_data = wq[0].d; w_nvec = wq[0].n; w_rms = wq[0].r; end
    o_ready  = bp ? 1'($urandom % 2) : 1'b1;
  end

  // ---------------- host model ----------------
  task automatic wr(input int a, input logic [31:0] d);
    @(posedge clk); #2 cfg_we = 1; cfg_addr = 3'(a); cfg_wdata = d;
    @(posedge clk); #2 cfg_we = 0;
  endtask
  task automatic run_cmd(input op_e o, output int cycles);
    int c;
    wr(0, {28'd0, 3'(o), 1'b1});
    c = 0;
    do begin @(posedge clk); c++; end while (!irq_done);
    #2 cfg_addr = 3'd1; #1;
    checks++;
    if (cfg_rdata[1] != 1'b1) begin failures++; $display("STATUS.done not set"); end
    cycles = c;
  endtask

  // ---------------- model data ----------------
  function automatic int wt(input int n, input int c);   // ternary weight
    if (n >= DM) return 0;
    return ((n * 7 + c * 5 + (n ^ c)) % 3) - 1;
  endfunction
  real X [NTK][DM], RW [DM], A [NTK][DM], MX [NTK], LIN [NTK][DM], YV [NTK][DM];

  initial begin
    #60_000_000;   // 6M cycles
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    int n_mode [4];
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    s0_valid = 0; s1_valid = 0; s2_valid = 0; w_valid = 0; o_ready = 1;
    s0_data = '0; s1_data = '0; s2_data = '0; w_data = '0; w_nvec = '0; w_rms = 0;
    f0 = 0; f1 = 0; f2 = 0; fw = 0; fo = 0;
    for (int i = 0; i < 4; i++) n_mode[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- 1. weight load ----
    for (int i = 0; i < DM; i++) RW[i] = f16_to_real(real_to_f16(0.5 + real'($urandom % 1000) / 1000.0));
    begin
      int f, nb;
      beat_t bt;
      f = 0; nb = 0;
      while (f < YR * DM) begin
        bt = '0;
        for (int j = 0; j < 5 && f < YR * DM; j++) begin
          int y, z;
          y = f / DM; z = f % DM;
          for (int t = 0; t < T; t++) begin
            int code;
            code = 0;
            for (int g = G - 1; g >= 0; g--) code = code * 3 + (wt(y*TG + t*G + g, z) + 1);
            bt.d[j*WIDX_W + t*B_IDX +: B_IDX] = 5'(code);
          end
          bt.n = 3'(j + 1);
          f++;
        end
        if (nb < DM) begin bt.r = 1'b1; bt.d[767:752] = real_to_f16(RW[nb]); end
        wq.push_back(bt);
        nb++;
      end
      wr(7, nb);
      run_cmd(OP_WLOAD, cyc);
      $display("weight load: %0d beats in %0d cycles", nb, cyc);
      checks++;
      if (n_beats != nb || cyc > nb + 4) failures++;
    end

    // ---- 2. RMSNorm + absmax ----
    for (int t = 0; t < NTK; t++) begin
      real ss, r;
      ss = 0.0;
      for (int i = 0; i < DM; i++) begin
        X[t][i] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 250.0));
        ss += X[t][i] * X[t][i];
      end
      r = $sqrt(ss / DM + 1e-5);
      for (int i = 0; i < DM; i++) A[t][i] = X[t][i] / r * RW[i];
    end
    for (int t = 0; t < NTK; t++)
      for (int w = 0; w < NW; w++) begin
        fp16_vec_t v;
        for (int e = 0; e < VEC; e++) v[e] = real_to_f16(X[t][w*VEC + e]);
        q0.push_back(v);
      end
    oq.delete();
    wr(2, DM); wr(4, NTK);
    run_cmd(OP_RMS, cyc);
    $display("rmsnorm: %0d tokens in %0d cycles", NTK, cyc);
    checks++;
    if (oq.size() != NTK * NW) begin failures++; $display("rms words %0d", oq.size()); end
    for (int t = 0; t < NTK; t++) begin
      MX[t] = 0.0;
      for (int i = 0; i < DM; i++) begin
        real g;
        g = f16_to_real(oq[t*NW + i/VEC][i%VEC]);
        checks++;
        if (!close(g, A[t][i], 4.0/1024, 2e-3)) begin
          failures++; if (failures < 8) $display("rms t%0d i%0d got %f want %f", t, i, g, A[t][i]);
        end
        A[t][i] = g;                       // what the next layer really sees
        if (fabs(g) > MX[t]) MX[t] = fabs(g);
      end
      checks++;
      if (dut.u_maxbuf.mem[t] != real_to_f16(MX[t])) begin failures++; $display("max buffer token %0d", t); end
    end

    // ---- 3. linear layers with each element-wise op ----
    for (int t = 0; t < NTK; t++)
      for (int c = 0; c < DM; c++) begin
        int acc, qv;
        real x;
        acc = 0;
        for (int i = 0; i < DM; i++) begin
          x = A[t][i] * 127.0 / MX[t];
          qv = (x >= 0.0) ? int'($floor(x + 0.5)) : -int'($floor(-x + 0.5));
          if (qv > 127) qv = 127;
          if (qv < -127) qv = -127;
          acc += qv * wt(i, c);
        end
        LIN[t][c] = real'(acc) * MX[t] / 127.0 * 0.05;
      end
    wr(2, DM); wr(3, DM); wr(4, NTK); wr(6, real_to_f16(0.05));
    for (int m = 0; m < 4; m++) begin
      ew_op_e op;
      op = ew_op_e'(m);
      wr(5, {28'd0, 2'(PROJ_QKVO), 2'(op)});
      for (int t = 0; t < NTK; t++) begin
        for (int w = 0; w < NW; w++) begin
          fp16_vec_t v, y;
          for (int e = 0; e < VEC; e++) begin
            v[e] = real_to_f16(A[t][w*VEC + e]);
            YV[t][w*VEC + e] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
            y[e] = real_to_f16(YV[t][w*VEC + e]);
          end
          q0.push_back(v);
          if (op != EW_BYPASS) q1.push_back(y);
        end
      end
      oq.delete();
      bp = (op == EW_ADD);
      run_cmd(OP_LINEAR, cyc);
      bp = 0;
      $display("linear %0dx%0d, op %0d: %0d tokens in %0d cycles (engine bound %0d)", DM, DM, m, NTK,
               cyc, NTK * YR * (DM / Q + 1));
      if (op != EW_ADD) begin
        checks++;
        if (cyc > NTK * YR * (DM / Q + 1) + 40) failures++;
      end
      checks++;
      if (oq.size() != NTK * NW || q1.size() != 0) begin failures++; $display("linear words %0d", oq.size()); end
      else begin
        n_mode[m]++;
        for (int t = 0; t < NTK; t++)
          for (int c = 0; c < DM; c++) begin
            real want, g, xe, xo;
            xe = LIN[t][c & ~1]; xo = LIN[t][c | 1];
            case (op)
              EW_ADD:  want = LIN[t][c] + YV[t][c];
              EW_SILU: want = LIN[t][c] / (1.0 + $exp(-LIN[t][c])) * YV[t][c];
              EW_ROPE: want = (c % 2 == 0) ? xe * YV[t][c] - xo * YV[t][c+1]
                                           : xo * YV[t][c-1] + xe * YV[t][c];
              default: want = LIN[t][c];
            endcase
            g = f16_to_real(oq[t*NW + c/VEC][c%VEC]);
            checks++;
            if (!close(g, want, 8.0/1024, 2.0 * MX[t] / 127.0 * 0.05)) begin
              failures++; if (failures < 8) $display("lin op%0d t%0d c%0d got %f want %f", m, t, c, g, want);
            end
          end
      end
    end

    // ---- 4. prefill attention (reversed order) ----
    begin
      real QR [NPRE][DM], KR [NPRE][DM], VR [NPRE][DM];
      for (int i = 0; i < NPRE; i++)
        for (int d = 0; d < DM; d++) begin
          QR[i][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
          KR[i][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
          VR[i][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
        end
      for (int b0 = 0; b0 < NPRE; b0 += 8) begin
        for (int p = 0; p < 8 && b0 + p < NPRE; p++)
          for (int w = 0; w < NW; w++) begin
            fp16_vec_t v;
            for (int e = 0; e < VEC; e++) v[e] = real_to_f16(QR[NPRE-1-b0-p][w*VEC+e]);
            q0.push_back(v);
          end
        for (int jj = 0; jj < NPRE - b0; jj++)
          for (int w = 0; w < NW; w++) begin
            fp16_vec_t k, v;
            for (int e = 0; e < VEC; e++) begin
              k[e] = real_to_f16(KR[NPRE-1-b0-jj][w*VEC+e]);
              v[e] = real_to_f16(VR[NPRE-1-b0-jj][w*VEC+e]);
            end
            q1.push_back(k); q2.push_back(v);
          end
      end
      oq.delete();
      wr(2, NPRE);
      run_cmd(OP_PREFILL, cyc);
      $display("prefill: %0d tokens in %0d cycles", NPRE, cyc);
      checks++;
      if (oq.size() != NPRE * NW) begin failures++; $display("prefill words %0d", oq.size()); end
      else
        for (int a = 0; a < NPRE; a++) begin
          int i;
          i = NPRE - 1 - a;                          // output order = address order
          for (int h = 0; h < N_HEAD; h++) begin
            real s [NPRE];
            real m, l;
            m = -1e30; l = 0.0;
            for (int j = 0; j <= i; j++) begin
              s[j] = 0.0;
              for (int d = 0; d < D_HEAD; d++) s[j] += QR[i][h*D_HEAD+d] * KR[j][h*D_HEAD+d];
              s[j] = s[j] / $sqrt(D_HEAD);
              if (s[j] > m) m = s[j];
            end
            for (int j = 0; j <= i; j++) l += $exp(s[j] - m);
            for (int d = 0; d < D_HEAD; d++) begin
              real want, g;
              int idx;
              want = 0.0;
              for (int j = 0; j <= i; j++) want += $exp(s[j] - m) / l * VR[j][h*D_HEAD+d];
              idx = h * D_HEAD + d;
              g = f16_to_real(oq[a*NW + idx/VEC][idx%VEC]);
              checks++;
              if (!close(g, want, 4.0/1024, 3e-3)) begin
                failures++; if (failures < 8) $display("prefill tok %0d d %0d got %f want %f", i, idx, g, want);
              end
            end
          end
        end
    end

    // ---- 5. decode attention ----
    begin
      real QD [DM], KD [NDEC][DM], VD [NDEC][DM];
      for (int d = 0; d < DM; d++) QD[d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
      for (int j = 0; j < NDEC; j++)
        for (int d = 0; d < DM; d++) begin
          KD[j][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
          VD[j][d] = f16_to_real(real_to_f16((real'($urandom % 2001) - 1000.0) / 1000.0));
        end
      for (int w = 0; w < NW; w++) begin
        fp16_vec_t v;
        for (int e = 0; e < VEC; e++) v[e] = real_to_f16(QD[w*VEC+e]);
        q0.push_back(v);
      end
      for (int j = 0; j < NDEC; j++)
        for (int w = 0; w < NW; w++) begin
          fp16_vec_t k, v;
          for (int e = 0; e < VEC; e++) begin
            k[e] = real_to_f16(KD[j][w*VEC+e]); v[e] = real_to_f16(VD[j][w*VEC+e]);
          end
          q1.push_back(k); q2.push_back(v);
        end
      oq.delete();
      wr(2, NDEC);
      run_cmd(OP_DECODE, cyc);
      $display("decode: %0d-token context in %0d cycles (two passes: %0d)", NDEC, cyc, 2 * NW * (NDEC + 1));
      checks++;
      if (cyc > 2 * NW * (NDEC + 1) + 8) failures++;
      checks++;
      if (oq.size() != NW) begin failures++; $display("decode words %0d", oq.size()); end
      else
        for (int h = 0; h < N_HEAD; h++) begin
          real s [NDEC];
          real m, l;
          m = -1e30; l = 0.0;
          for (int j = 0; j < NDEC; j++) begin
            s[j] = 0.0;
            for (int d = 0; d < D_HEAD; d++) s[j] += QD[h*D_HEAD+d] * KD[j][h*D_HEAD+d];
            s[j] = s[j] / $sqrt(D_HEAD);
            if (s[j] > m) m = s[j];
          end
          for (int j = 0; j < NDEC; j++) l += $exp(s[j] - m);
          for (int d = 0; d < D_HEAD; d++) begin
            real want, g;
            int idx;
            want = 0.0;
            for (int j = 0; j < NDEC; j++) want += $exp(s[j] - m) / l * VD[j][h*D_HEAD+d];
            idx = h * D_HEAD + d;
            g = f16_to_real(oq[idx/VEC][idx%VEC]);
            checks++;
            if (!close(g, want, 4.0/1024, 3e-3)) begin
              failures++; if (failures < 8) $display("decode d %0d got %f want %f", idx, g, want);
            end
          end
        end
    end

    // ---- mechanism coverage ----
    $display("mechanisms: beats=%0d maxw=%0d bypass=%0d add=%0d silu=%0d rope=%0d pad=%0d stalls=%0d skips=%0d partial=%0d irq=%0d",
             n_beats, n_maxw, n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_pad, n_stall, n_skip, n_partial, n_irq);
    if (n_beats == 0)   begin failures++; $display("never: weight load"); end
    if (n_maxw == 0)    begin failures++; $display("never: max-buffer write"); end
    for (int m = 0; m < 4; m++) if (n_mode[m] == 0) begin failures++; $display("never: ew mode %0d", m); end
    if (n_pad == 0)     begin failures++; $display("never: zero-padded slice"); end
    if (n_stall == 0)   begin failures++; $display("never: output stall"); end
    if (n_skip == 0)    begin failures++; $display("never: causal skip"); end
    if (n_partial == 0) begin failures++; $display("never: partial prefill batch"); end
    if (n_irq != 8)     begin failures++; $display("irq count %0d", n_irq); end
    checks += 11;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
