// int8_quant: ABSMAX INT8 quantisation with stream resizing.
//
// Takes 16-lane FP16 words (one 256-bit stream word) of a token of cfg_n
// elements, multiplies each by inv_scale = 127 / absmax(token) and rounds to
// the nearest integer, saturated to [-127, 127]. The INT8 values are then
// regrouped into T*G = 84-element vectors for the TLMM engine. Because 84 is
// not a multiple of 16, a holding register of 84+16 bytes collects words;
// whenever it holds 84 values a vector leaves and the rest shifts down. At the
// end of a token the last partial vector is padded with zeros, which is the
// zero padding of d_model to d_model' = a multiple of T*G.
// tok_idx is the token being quantised; inv_scale must be valid for it.
// Throughput: one input word per cycle while the holding register has room.
module int8_quant
  import tellme_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] cfg_n,          // elements per token, multiple of 16
  input  logic        clear,          // restart token counting
  input  fp32_t       inv_scale,
  output logic [15:0] tok_idx,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp16_vec_t   in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output int8_tg_t    out_data
);
  localparam int unsigned HW = TG + VEC;
  int8_t hold [HW];
  logic [7:0]  p;           // valid bytes in hold
  logic [15:0] elem;        // elements of this token taken so far
  logic        tok_end;     // whole token taken, flush pending

  assign in_ready  = (p < 8'(TG)) && !tok_end;
  assign out_valid = (p >= 8'(TG)) || (tok_end && p != 0);
  always_comb for (int i = 0; i < TG; i++) out_data[i] = hold[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p <= '0; elem <= '0; tok_end <= 1'b0; tok_idx <= '0;
      for (int i = 0; i < HW; i++) hold[i] <= '0;
    end else if (clear) begin
      p <= '0; elem <= '0; tok_end <= 1'b0; tok_idx <= '0;
      for (int i = 0; i < HW; i++) hold[i] <= '0;
    end else begin
      if (out_valid && out_ready) begin
        if (p >= 8'(TG)) begin
          for (int i = 0; i < HW; i++) hold[i] <= (i + TG < HW) ? hold[i + TG] : '0;
          p <= p - 8'(TG);
          if (tok_end && p == 8'(TG)) begin tok_end <= 1'b0; tok_idx <= tok_idx + 1'b1; end
        end else begin
          for (int i = 0; i < HW; i++) hold[i] <= '0;
          p <= '0;
          tok_end <= 1'b0;
          tok_idx <= tok_idx + 1'b1;
        end
      end else if (in_valid && in_ready) begin
        for (int i = 0; i < VEC; i++)
          hold[int'(p) + i] <= 8'(f32_to_int_sat(f32_mul(f16_to_f32(in_data[i]), inv_scale), 127));
        p <= p + 8'(VEC);
        if (elem + 16'(VEC) >= cfg_n) begin elem <= '0; tok_end <= 1'b1; end
        else elem <= elem + 16'(VEC);
      end
    end
  end
endmodule
