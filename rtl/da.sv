// da: decode attention (DA) unit.
//
// Attention of one new query token against N cached keys and values, split
// into two memory-bound passes instead of a fused one:
//   K pass: for each cached key j (d_model/16 words from the K cache), a
//           head-wise MAC gives s[j][h] = q_h.k_h / sqrt(d_h), kept in the
//           on-chip score buffer; at the end of each head an online softmax
//           step updates the running max m[h] and sum l[h]
//           (l = l*e^(m-m') + e^(s-m')).
//   V pass: for each cached value j, p = e^(s[j][h] - m[h]) / l[h] and the
//           output accumulates o += p * v (head-wise MAC).
//   Output: o, d_model/16 words of FP16.
// The scores never leave the chip. Internal state is FP32 (this design's
// choice). Timing: d_model/16 cycles to load q, N*d_model/16 per pass, and
// d_model/16 to write out.
module da
  import tellme_pkg::*;
#(
  parameter int unsigned N_CTX = 2048,      // score buffer depth (tokens)
  parameter int unsigned NH    = N_HEAD,
  parameter int unsigned DH    = D_HEAD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] cfg_n,          // context length including the new token
  output logic        busy,
  output logic        done,
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
  localparam int unsigned NW  = DM / VEC;
  localparam int unsigned WPH = DH / VEC;
  localparam fp32_t RSQRT_DH = f32_div(F32_ONE, f32_sqrt(f32_from_int(32'(DH))));
  typedef fp32_t [VEC-1:0] f32v_t;

  typedef enum logic [2:0] {S_IDLE, S_LOADQ, S_K, S_V, S_OUT} state_e;
  state_e state;
  fp16_vec_t qbuf [NW];
  f32v_t     obuf [NW];
  fp32_t     sbuf [N_CTX][NH];
  fp32_t     mbuf [NH];
  fp32_t     lbuf [NH];
  fp32_t     acc;
  logic [15:0] j, w, head;
  assign head = w / 16'(WPH);
  assign busy = (state != S_IDLE);
  assign q_ready = (state == S_LOADQ);
  assign k_ready = (state == S_K);
  assign v_ready = (state == S_V);

  fp32_t kdot, s_new, m_new, pj;
  f32v_t onew;
  always_comb begin
    kdot = F32_ZERO;
    for (int e = 0; e < VEC; e++)
      kdot = f32_add(kdot, f32_mul(f16_to_f32(qbuf[w][e]), f16_to_f32(k_data[e])));
    s_new = f32_mul(f32_add(acc, kdot), RSQRT_DH);
    m_new = f32_max(mbuf[head], s_new);
    pj    = f32_div(f32_exp(f32_sub(sbuf[$clog2(N_CTX)'(j)][head], mbuf[head])), lbuf[head]);
    for (int e = 0; e < VEC; e++)
      onew[e] = f32_add(obuf[w][e], f32_mul(pj, f16_to_f32(v_data[e])));
  end

  logic emit;
  assign emit = (state == S_OUT) && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; j <= '0; w <= '0; acc <= F32_ZERO;
      out_valid <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (start) begin state <= S_LOADQ; w <= '0; j <= '0; end
        S_LOADQ: if (q_valid) begin
          qbuf[w] <= q_data;
          if (w == 16'(NW - 1)) begin
            w <= '0; state <= S_K; acc <= F32_ZERO;
            for (int h = 0; h < NH; h++) begin mbuf[h] <= F32_NEGINF; lbuf[h] <= F32_ZERO; end
            for (int x = 0; x < NW; x++) obuf[x] <= '0;
          end else w <= w + 16'd1;
        end
        S_K: if (k_valid) begin
          if ((w % 16'(WPH)) == 16'(WPH - 1)) begin
            sbuf[$clog2(N_CTX)'(j)][head] <= s_new;
            mbuf[head] <= m_new;
            lbuf[head] <= f32_add(f32_mul(lbuf[head], f32_exp(f32_sub(mbuf[head], m_new))),
                                  f32_exp(f32_sub(s_new, m_new)));
            acc <= F32_ZERO;
          end else acc <= f32_add(acc, kdot);
          if (w == 16'(NW - 1)) begin
            w <= '0;
            if (j == cfg_n - 16'd1) begin j <= '0; state <= S_V; end
            else j <= j + 16'd1;
          end else w <= w + 16'd1;
        end
        S_V: if (v_valid) begin
          obuf[w] <= onew;
          if (w == 16'(NW - 1)) begin
            w <= '0;
            if (j == cfg_n - 16'd1) begin j <= '0; state <= S_OUT; end
            else j <= j + 16'd1;
          end else w <= w + 16'd1;
        end
        S_OUT: if (emit) begin
          for (int e = 0; e < VEC; e++) out_data[e] <= f32_to_f16(obuf[w][e]);
          out_valid <= 1'b1;
          if (w == 16'(NW - 1)) begin w <= '0; state <= S_IDLE; done <= 1'b1; end
          else w <= w + 16'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
