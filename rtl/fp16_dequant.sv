// fp16_dequant: converts the TLMM engine's 16-lane INT32 sums to FP16 and
// multiplies them by the dequantisation scale of the token,
// scale = absmax(token)/127 * weight scale, in one registered stage.
// tok_idx counts tokens (cfg_kw words each) so the scale can be looked up.
// Handshake: valid/ready; the stage accepts a word whenever its output
// register is empty or being emptied.
module fp16_dequant
  import tellme_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic [15:0] cfg_kw,        // output words per token (k / 16)
  input  fp32_t       scale,
  output logic [15:0] tok_idx,
  input  logic        in_valid,
  output logic        in_ready,
  input  int32_vec_t  in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output fp16_vec_t   out_data
);
  logic [15:0] w;
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; w <= '0; tok_idx <= '0; out_data <= '0;
    end else if (clear) begin
      out_valid <= 1'b0; w <= '0; tok_idx <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        for (int i = 0; i < VEC; i++)
          out_data[i] <= f32_to_f16(f32_mul(f32_from_int(in_data[i]), scale));
        out_valid <= 1'b1;
        if (w == cfg_kw - 16'd1) begin w <= '0; tok_idx <= tok_idx + 1'b1; end
        else w <= w + 16'd1;
      end
    end
  end
endmodule
