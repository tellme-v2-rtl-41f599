// rms_max: RMSNorm followed by the per-token absolute maximum (RMS-MAX unit).
//
// Per token of cfg_n elements (16 per stream word):
//   Read/Accum : each word is stored in the token buffer and x^2 of its 16
//                lanes is summed in FP32 (upcast) into the running sum.
//   Denom      : rms = sqrt(sum / n + eps), rounded to FP16 (one cycle).
//   Write      : out = (x / rms) * w, FP16 division then FP16 weight
//                scaling; words go to the output stream while a running
//                absolute maximum is kept; after the last word the maximum is
//                written to the channel-wise max buffer (max_we/max_addr).
// The paper splits max finding into per-segment then global maxima joined by
// a FIFO; a single running maximum computed alongside the output is
// equivalent. eps = 1e-5 is this design's choice (not given in the paper).
// Throughput: n/16 cycles to read, 1 to compute rms, n/16 to write.
module rms_max
  import tellme_pkg::*;
#(
  parameter int unsigned NMAX  = D_FFN,     // largest token length (the FFN sub-norm)
  parameter int unsigned N_TOK = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] cfg_n,
  input  logic [15:0] cfg_tokens,
  output logic        busy,
  output logic        done,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp16_vec_t   in_data,
  // RMSNorm weights, 16 per word, from the weight buffer
  output logic [$clog2(NMAX/VEC)-1:0] w_addr,
  input  fp16_vec_t   w_data,
  output logic        out_valid,
  input  logic        out_ready,
  output fp16_vec_t   out_data,
  output logic        max_we,
  output logic [$clog2(N_TOK)-1:0] max_addr,
  output fp16_t       max_data
);
  localparam int unsigned NW = NMAX / VEC;
  localparam fp32_t EPS = 32'h3727_C5AC;   // 1e-5

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_DEN, S_OUT} state_e;
  state_e state;
  fp16_vec_t tbuf [NW];
  logic [15:0] wi, nw, tok;
  fp32_t sumsq, amax;
  fp16_t rms16;

  assign nw       = cfg_n / 16'(VEC);
  assign in_ready = (state == S_ACC);
  assign busy     = (state != S_IDLE);
  assign w_addr   = $clog2(NW)'(wi);

  fp32_t word_sq;
  always_comb begin
    word_sq = F32_ZERO;
    for (int i = 0; i < VEC; i++) begin
      fp32_t xi;
      xi = f16_to_f32(in_data[i]);
      word_sq = f32_add(word_sq, f32_mul(xi, xi));
    end
  end

  fp16_vec_t y;
  fp32_t ymax;
  always_comb begin
    ymax = amax;
    for (int i = 0; i < VEC; i++) begin
      y[i] = f32_to_f16(f32_mul(f32_div(f16_to_f32(tbuf[wi][i]), f16_to_f32(rms16)),
                                f16_to_f32(w_data[i])));
      ymax = f32_max(ymax, {1'b0, f16_to_f32(y[i])[30:0]});
    end
  end

  logic emit;
  assign emit = (state == S_OUT) && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; wi <= '0; tok <= '0; sumsq <= F32_ZERO; amax <= F32_ZERO;
      rms16 <= '0; out_valid <= 1'b0; out_data <= '0; done <= 1'b0;
      max_we <= 1'b0; max_addr <= '0; max_data <= '0;
    end else begin
      done   <= 1'b0;
      max_we <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_ACC; wi <= '0; tok <= '0; sumsq <= F32_ZERO;
        end
        S_ACC: if (in_valid) begin
          tbuf[wi] <= in_data;
          sumsq <= f32_add(sumsq, word_sq);
          if (wi == nw - 16'd1) begin wi <= '0; state <= S_DEN; end
          else wi <= wi + 16'd1;
        end
        S_DEN: begin
          rms16 <= f32_to_f16(f32_sqrt(f32_add(f32_div(sumsq, f32_from_int(32'(cfg_n))), EPS)));
          amax  <= F32_ZERO;
          state <= S_OUT;
        end
        S_OUT: if (emit) begin
          out_data  <= y;
          out_valid <= 1'b1;
          amax      <= ymax;
          if (wi == nw - 16'd1) begin
            wi       <= '0;
            max_we   <= 1'b1;
            max_addr <= $clog2(N_TOK)'(tok);
            max_data <= f32_to_f16(ymax);
            sumsq    <= F32_ZERO;
            if (tok == cfg_tokens - 16'd1) begin state <= S_IDLE; done <= 1'b1; end
            else begin tok <= tok + 16'd1; state <= S_ACC; end
          end else wi <= wi + 16'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
