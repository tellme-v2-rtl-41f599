// tlmm_fuse: one ternary linear layer with its fused element-wise work.
//
//   act_in (16 x FP16) -> int8_quant -> FIFO -> tlmm_engine -> fp16_dequant
//        -> elementwise_unit (bypass / SiLU-mul / add / RoPE, with y_in) -> out
//
// All stages are valid/ready streams and run concurrently, so quantisation,
// look-up, dequantisation and element-wise work of successive words overlap
// (the LOAD/QUANT/TLMM/DEQUANT/ELEMENTWISE/WRITE BACK overlap of the paper).
// Scales: the quantiser uses 127/absmax(token) and the dequantiser
// absmax(token)/127 * cfg_wscale, absmax being read from the channel-wise max
// buffer by token index (two read ports, as the two stages can be on
// different tokens). cfg_wscale is the per-tensor weight scale of the ternary
// layer (BitNet's), given by the host. Weight look-ups go out on w_* to the
// weight buffer.
module tlmm_fuse
  import tellme_pkg::*;
#(
  parameter int unsigned K_MAX = D_FFN_P,
  parameter int unsigned N_TOK = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] cfg_n,        // input elements per token (multiple of 16)
  input  logic [15:0] cfg_k,        // output elements per token (multiple of 16)
  input  logic [15:0] cfg_tokens,
  input  ew_op_e      cfg_op,
  input  fp16_t       cfg_wscale,
  output logic        busy,
  output logic        done,
  input  logic        act_valid,
  output logic        act_ready,
  input  fp16_vec_t   act_data,
  input  logic        y_valid,
  output logic        y_ready,
  input  fp16_vec_t   y_data,
  output logic        out_valid,
  input  logic        out_ready,
  output fp16_vec_t   out_data,
  // weight buffer access
  output logic        w_valid,
  output logic [15:0] w_a,
  output logic [15:0] w_b,
  input  widx_t       w_idx [Q],
  // channel-wise max buffer reads
  output logic [$clog2(N_TOK)-1:0] max_raddr_a,
  input  fp16_t       max_rdata_a,
  output logic [$clog2(N_TOK)-1:0] max_raddr_b,
  input  fp16_t       max_rdata_b
);
  logic [15:0] rows, q_tok, d_tok;
  logic [31:0] out_cnt, out_total;
  assign rows = 16'((32'(cfg_n) + TG - 1) / TG);

  // ---- quantiser ----
  logic q_valid, q_ready, f_valid, f_ready;
  int8_tg_t q_data, f_data;
  fp32_t inv_scale, deq_scale;
  assign max_raddr_a = $clog2(N_TOK)'(q_tok);
  assign max_raddr_b = $clog2(N_TOK)'(d_tok);
  assign inv_scale   = f32_div(F32_127, f16_to_f32(max_rdata_a));
  assign deq_scale   = f32_mul(f32_div(f16_to_f32(max_rdata_b), F32_127), f16_to_f32(cfg_wscale));

  int8_quant u_quant (
    .clk (clk), .rst_n (rst_n), .cfg_n (cfg_n), .clear (start),
    .inv_scale (inv_scale), .tok_idx (q_tok),
    .in_valid (act_valid), .in_ready (act_ready), .in_data (act_data),
    .out_valid (q_valid), .out_ready (q_ready), .out_data (q_data)
  );

  logic [$clog2(5)-1:0] f_cnt;
  stream_fifo #(.WIDTH($bits(int8_tg_t)), .DEPTH(4)) u_qfifo (
    .clk (clk), .rst_n (rst_n),
    .in_valid (q_valid), .in_ready (q_ready), .in_data (q_data),
    .out_valid (f_valid), .out_ready (f_ready), .out_data (f_data), .count (f_cnt)
  );

  // ---- TLMM ----
  logic e_valid, e_ready, e_busy, e_done;
  int32_vec_t e_data;
  tlmm_engine #(.K_MAX(K_MAX)) u_tlmm (
    .clk (clk), .rst_n (rst_n), .start (start),
    .cfg_rows (rows), .cfg_kq (cfg_k / 16'(Q)), .cfg_tokens (cfg_tokens),
    .busy (e_busy), .done (e_done),
    .act_valid (f_valid), .act_ready (f_ready), .act_data (f_data),
    .wreq_valid (w_valid), .wreq_a (w_a), .wreq_b (w_b), .wrsp_idx (w_idx),
    .out_valid (e_valid), .out_ready (e_ready), .out_data (e_data)
  );

  // ---- dequant ----
  logic d_valid, d_ready;
  fp16_vec_t d_data;
  fp16_dequant u_deq (
    .clk (clk), .rst_n (rst_n), .clear (start), .cfg_kw (cfg_k / 16'(VEC)),
    .scale (deq_scale), .tok_idx (d_tok),
    .in_valid (e_valid), .in_ready (e_ready), .in_data (e_data),
    .out_valid (d_valid), .out_ready (d_ready), .out_data (d_data)
  );

  // ---- element-wise ----
  elementwise_unit u_ew (
    .clk (clk), .rst_n (rst_n), .op (cfg_op),
    .x_valid (d_valid), .x_ready (d_ready), .x_data (d_data),
    .y_valid (y_valid), .y_ready (y_ready), .y_data (y_data),
    .out_valid (out_valid), .out_ready (out_ready), .out_data (out_data)
  );

  // ---- completion: all output words of all tokens have left ----
  logic run;
  assign out_total = 32'(cfg_k / 16'(VEC)) * 32'(cfg_tokens);
  assign busy = run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; out_cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin run <= 1'b1; out_cnt <= '0; end
      else if (run && out_valid && out_ready) begin
        if (out_cnt == out_total - 32'd1) begin run <= 1'b0; done <= 1'b1; end
        out_cnt <= out_cnt + 32'd1;
      end
    end
  end
endmodule
