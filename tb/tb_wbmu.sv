// tb_wbmu: loads the whole index-vector space of a layer through 768-bit
// beats (five 140-bit vectors + one FP16 RMSNorm weight each), then issues
// aligned Q-wide reads for all three projection kinds and checks the Q
// vectors returned one cycle later against the testbench's own copy,
// addressed by its own translation. Also reads back the RMSNorm weights.
module tb_wbmu;
  import tellme_pkg::*;
  localparam int NV = 3 * 19 * 1536;      // index vectors in the buffer space
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_start, ld_valid, ld_rms, ld_ready, rd_valid;
  logic [767:0] ld_data;
  logic [2:0] ld_nvec;
  proj_e rd_proj;
  logic [15:0] rd_a, rd_b;
  widx_t rd_idx [Q];
  logic [$clog2(D_FFN/VEC)-1:0] rms_addr;
  fp16_vec_t rms_w;

  wbmu dut (.clk, .rst_n, .ld_start, .ld_valid, .ld_data, .ld_nvec, .ld_rms, .ld_ready,
            .rd_valid, .rd_proj, .rd_a, .rd_b, .rd_idx, .rms_addr, .rms_w);

  function automatic widx_t vec_of(input int f);
    widx_t v;
    for (int i = 0; i < 5; i++) v[i*28 +: 28] = 28'(f * 7919 + i * 104729 + 12345);
    return v;
  endfunction
  function automatic fp16_t rmsw_of(input int i);
    return 16'(i * 37 + 5);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f, beat;
    ld_start = 0; ld_valid = 0; ld_rms = 0; ld_nvec = 0; ld_data = '0; rd_valid = 0;
    rd_proj = PROJ_QKVO; rd_a = 0; rd_b = 0; rms_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) ld_start = 1; @(negedge clk) ld_start = 0;
    f = 0; beat = 0;
    while (f < NV) begin
      ld_data = '0;
      ld_nvec = 3'((NV - f < 5) ? NV - f : 5);
      for (int j = 0; j < int'(ld_nvec); j++) ld_data[j*140 +: 140] = vec_of(f + j);
      ld_rms = (beat < D_FFN);
      ld_data[767:752] = rmsw_of(beat);
      ld_valid = 1;
      @(negedge clk);
      f += int'(ld_nvec); beat++;
    end
    ld_valid = 0;
    // access
    for (int i = 0; i < 600; i++) begin
      int ia, ib, ex, ef;
      rd_proj = proj_e'(i % 3);
      case (rd_proj)
        PROJ_QKVO: begin ia = TG * ($urandom % 19); ib = Q * ($urandom % 96); end
        PROJ_UP:   begin ia = TG * ($urandom % 19); ib = Q * ($urandom % 256); end
        default:   begin ia = TG * ($urandom % 49); ib = Q * ($urandom % 96); end
      endcase
      rd_a = 16'(ia); rd_b = 16'(ib); rd_valid = 1;
      ex = (rd_proj == PROJ_UP) ? ib / 1536 : (rd_proj == PROJ_DOWN) ? ia / 1596 : 0;
      ef = (ex * 19 + (ia % 1596) / 84) * 1536 + ib % 1536;
      @(negedge clk);
      rd_valid = 0;
      for (int q = 0; q < Q; q++) begin
        checks++;
        if (rd_idx[q] !== vec_of(ef + q)) begin
          failures++;
          if (failures < 5) $display("proj %0d a %0d b %0d lane %0d wrong", rd_proj, ia, ib, q);
        end
      end
    end
    for (int w = 0; w < D_FFN / VEC; w += 7) begin
      rms_addr = 8'(w); #1;
      for (int e = 0; e < VEC; e++) begin
        checks++;
        if (rms_w[e] !== rmsw_of(w * VEC + e)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
