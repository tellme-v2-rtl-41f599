// elementwise_unit: the element-wise stage after dequantisation.
//
// An arbiter sends each 16-lane FP16 word of x (the dequantised linear
// output) to one of four paths, chosen by op for the whole layer:
//   EW_BYPASS : out = x
//   EW_SILU   : out = silu(x) * y   (SwiGLU: x = gate projection, y = up)
//   EW_ADD    : out = x + y         (residual connection)
//   EW_ROPE   : out[2t]   = x[2t]*cos_t - x[2t+1]*sin_t
//               out[2t+1] = x[2t+1]*cos_t + x[2t]*sin_t
//               (consecutive-pair RoPE), with y[2t] = cos_t, y[2t+1] = sin_t
// y arrives on the second input stream (a DDR read port), one word per x
// word; it is not consumed in bypass. The cos/sin layout within a y word is
// this design's choice; the paper only says the sinusoids are precomputed in
// DDR. One registered stage, valid/ready on all three streams.
module elementwise_unit
  import tellme_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  ew_op_e     op,
  input  logic       x_valid,
  output logic       x_ready,
  input  fp16_vec_t  x_data,
  input  logic       y_valid,
  output logic       y_ready,
  input  fp16_vec_t  y_data,
  output logic       out_valid,
  input  logic       out_ready,
  output fp16_vec_t  out_data
);
  logic need_y, fire, slot;
  fp16_vec_t res;
  assign need_y  = (op != EW_BYPASS);
  assign slot    = !out_valid || out_ready;
  assign fire    = slot && x_valid && (!need_y || y_valid);
  assign x_ready = fire;
  assign y_ready = fire && need_y;

  always_comb begin
    for (int i = 0; i < VEC; i++) begin
      fp32_t xi, yi;
      xi = f16_to_f32(x_data[i]);
      yi = f16_to_f32(y_data[i]);
      unique case (op)
        EW_SILU: res[i] = f32_to_f16(f32_mul(f32_silu(xi), yi));
        EW_ADD:  res[i] = f32_to_f16(f32_add(xi, yi));
        EW_ROPE: begin
          fp32_t c, s, xe, xo;
          c  = f16_to_f32(y_data[i & ~1]);
          s  = f16_to_f32(y_data[i | 1]);
          xe = f16_to_f32(x_data[i & ~1]);
          xo = f16_to_f32(x_data[i | 1]);
          if ((i % 2) == 0) res[i] = f32_to_f16(f32_sub(f32_mul(xe, c), f32_mul(xo, s)));
          else              res[i] = f32_to_f16(f32_add(f32_mul(xo, c), f32_mul(xe, s)));
        end
        default: res[i] = x_data[i];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin out_valid <= 1'b1; out_data <= res; end
    end
  end
endmodule
