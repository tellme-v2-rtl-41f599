// rpa: reversed prefill attention (RPA) unit.
//
// Causal multi-head attention over a prompt of N tokens, with the softmax
// fused into the score and value passes (online softmax, Flash-Attention
// style with a block size of one key):
//   s = q.k / sqrt(d_h);  m' = max(m, s);  a = e^(m - m');  p = e^(s - m')
//   l = a*l + p;  o = a*o + p*v;  m = m';  result = o / l
// N_PE processing elements each hold one query token. Tokens are stored in
// reversed order (address 0 = token N), so batch b takes queries at addresses
// b*N_PE .. b*N_PE+N_PE-1 (tokens i = N-b*N_PE-p, p = PE number) and streams
// keys/values from address b*N_PE upward: key j = N-b*N_PE-jj for
// jj = 0 .. N-b*N_PE-1. A batch thus never reads keys newer than its newest
// query, and every batch's reads are incrementing bursts. PE p ignores the
// first p keys of its batch (they are in its future): that is the causal
// mask, done by skipping instead of computing and masking.
// Per key: KMAC (d_model/16 words; each PE multiplies its query by the
// multicast key and sums per head), SMAX (one cycle per head: new max,
// two exponentials, denominator update), VACC (d_model/16 words; each PE
// rescales and accumulates its output vector). After the last key of a batch
// each PE's o/l leaves as d_model/16 words, PE 0 first, heads consecutive.
// Internal state is FP32 (this design's choice; the paper does not give the
// precision of s, m, l and o). kv_off/kv_len/q_off/q_len tell the memory side
// which bursts the current batch needs.
module rpa
  import tellme_pkg::*;
#(
  parameter int unsigned N_PE = 8,
  parameter int unsigned NH   = N_HEAD,
  parameter int unsigned DH   = D_HEAD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] cfg_n,
  output logic        busy,
  output logic        done,
  output logic [15:0] q_off,
  output logic [15:0] q_len,
  output logic [15:0] kv_off,
  output logic [15:0] kv_len,
  input  logic        q_valid,
  output logic        q_ready,
  input  fp16_vec_t   q_data,
  input  logic        k_valid,
  output logic        k_ready,
  input  fp16_vec_t   k_data,
  input  logic        v_valid,
  output logic        v_ready,
  input  fp16_vec_t   v_data,
  output logic        out_valid,
  input  logic        out_ready,
  output fp16_vec_t   out_data
);
  localparam int unsigned DM  = NH * DH;
  localparam int unsigned NW  = DM / VEC;     // words per token
  localparam int unsigned WPH = DH / VEC;     // words per head
  typedef fp32_t [VEC-1:0] f32v_t;

  // 1/sqrt(d_h), computed at elaboration
  localparam fp32_t RSQRT_DH = f32_div(F32_ONE, f32_sqrt(f32_from_int(32'(DH))));

  typedef enum logic [2:0] {S_IDLE, S_LOADQ, S_KMAC, S_SMAX, S_VACC, S_OUT} state_e;
  state_e state;

  fp16_vec_t qbuf [N_PE][NW];
  f32v_t     obuf [N_PE][NW];
  fp32_t     s_acc [N_PE];
  fp32_t     sbuf [N_PE][NH];
  fp32_t     mbuf [N_PE][NH];
  fp32_t     lbuf [N_PE][NH];
  fp32_t     abuf [N_PE][NH];
  fp32_t     pbuf [N_PE][NH];

  logic [15:0] b0, jj, w, pe, hh;   // b0 = b*N_PE
  logic [15:0] head;
  assign head   = w / 16'(WPH);
  assign q_off  = b0;
  assign q_len  = ((cfg_n - b0) < 16'(N_PE)) ? (cfg_n - b0) : 16'(N_PE);
  assign kv_off = b0;
  assign kv_len = cfg_n - b0;
  assign busy   = (state != S_IDLE);
  assign q_ready = (state == S_LOADQ);
  assign k_ready = (state == S_KMAC);
  assign v_ready = (state == S_VACC);

  function automatic logic pe_on(input int p, input logic [15:0] ql, input logic [15:0] j);
    return (p < int'(ql)) && (int'(j) >= p);
  endfunction

  // ---- combinational PE datapaths ----
  fp32_t kdot [N_PE];
  f32v_t onew [N_PE];
  always_comb begin
    for (int p = 0; p < N_PE; p++) begin
      kdot[p] = F32_ZERO;
      for (int e = 0; e < VEC; e++)
        kdot[p] = f32_add(kdot[p], f32_mul(f16_to_f32(qbuf[p][w][e]), f16_to_f32(k_data[e])));
      for (int e = 0; e < VEC; e++)
        onew[p][e] = f32_add(f32_mul(obuf[p][w][e], abuf[p][head]),
                             f32_mul(pbuf[p][head], f16_to_f32(v_data[e])));
    end
  end

  logic emit;
  fp16_vec_t odiv;
  always_comb
    for (int e = 0; e < VEC; e++)
      odiv[e] = f32_to_f16(f32_div(obuf[pe][w][e], lbuf[pe][head]));
  assign emit = (state == S_OUT) && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; b0 <= '0; jj <= '0; w <= '0; pe <= '0; hh <= '0;
      out_valid <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_LOADQ; b0 <= '0; pe <= '0; w <= '0;
        end
        S_LOADQ: if (q_valid) begin
          qbuf[pe][w] <= q_data;
          if (w == 16'(NW - 1)) begin
            w <= '0;
            if (pe == q_len - 16'd1) begin
              pe <= '0; jj <= '0; state <= S_KMAC;
              for (int p = 0; p < N_PE; p++) begin
                s_acc[p] <= F32_ZERO;
                for (int h = 0; h < NH; h++) begin
                  mbuf[p][h] <= F32_NEGINF; lbuf[p][h] <= F32_ZERO;
                end
                for (int x = 0; x < NW; x++) obuf[p][x] <= '0;
              end
            end else pe <= pe + 16'd1;
          end else w <= w + 16'd1;
        end
        S_KMAC: if (k_valid) begin
          for (int p = 0; p < N_PE; p++) begin
            if (pe_on(p, q_len, jj)) begin
              if ((w % 16'(WPH)) == 16'(WPH - 1)) begin
                sbuf[p][head] <= f32_mul(f32_add(s_acc[p], kdot[p]), RSQRT_DH);
                s_acc[p] <= F32_ZERO;
              end else s_acc[p] <= f32_add(s_acc[p], kdot[p]);
            end
          end
          if (w == 16'(NW - 1)) begin w <= '0; hh <= '0; state <= S_SMAX; end
          else w <= w + 16'd1;
        end
        S_SMAX: begin
          for (int p = 0; p < N_PE; p++) begin
            if (pe_on(p, q_len, jj)) begin
              fp32_t mn, al, px;
              mn = f32_max(mbuf[p][hh], sbuf[p][hh]);
              al = f32_exp(f32_sub(mbuf[p][hh], mn));
              px = f32_exp(f32_sub(sbuf[p][hh], mn));
              mbuf[p][hh] <= mn;
              abuf[p][hh] <= al;
              pbuf[p][hh] <= px;
              lbuf[p][hh] <= f32_add(f32_mul(lbuf[p][hh], al), px);
            end
          end
          if (hh == 16'(NH - 1)) begin hh <= '0; state <= S_VACC; end
          else hh <= hh + 16'd1;
        end
        S_VACC: if (v_valid) begin
          for (int p = 0; p < N_PE; p++)
            if (pe_on(p, q_len, jj)) obuf[p][w] <= onew[p];
          if (w == 16'(NW - 1)) begin
            w <= '0;
            if (jj == kv_len - 16'd1) begin state <= S_OUT; pe <= '0; end
            else begin jj <= jj + 16'd1; state <= S_KMAC; end
          end else w <= w + 16'd1;
        end
        S_OUT: if (emit) begin
          out_data  <= odiv;
          out_valid <= 1'b1;
          if (w == 16'(NW - 1)) begin
            w <= '0;
            if (pe == q_len - 16'd1) begin
              pe <= '0;
              if (b0 + 16'(N_PE) >= cfg_n) begin state <= S_IDLE; done <= 1'b1; end
              else begin b0 <= b0 + 16'(N_PE); state <= S_LOADQ; end
            end else pe <= pe + 16'd1;
          end else w <= w + 16'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
