// tellme_top: the ternary LLM accelerator's programmable-logic part.
//
// Holds the five units of the design and a top-level controller:
//   WBMU + weight buffer (wbmu), TLMM-FUSE (tlmm_fuse), RMS-MAX (rms_max) with
//   the channel-wise max buffer (chan_max_buf), RPA (rpa) and DA (da), plus
//   the configuration registers (cfg_regs).
// The host writes a command (weight load, linear layer, RMSNorm, prefill
// attention, decode attention) and its sizes into the registers and sets
// start; the controller hands the stream ports to that unit until it reports
// done, then sets STATUS.done. A decoder layer is a sequence of such commands
// issued by the host, as in the model graph (RMSNorm -> q/k/v linears with
// RoPE -> attention -> RMSNorm -> o linear with residual add -> RMSNorm ->
// up, gate with SiLU-mul -> RMSNorm -> down with residual add).
//
// Memory side: in place of the AXI masters and DDR, the top has plain
// valid/ready streams, one per DDR read/write port:
//   s0 (256 bit) : activations / queries        s1 (256 bit) : y operand / keys
//   s2 (256 bit) : values                       w  (768 bit) : weights, from
//                                                  the three HP ports
//   o  (256 bit) : results
// For prefill attention, rpa_q_off/len and rpa_kv_off/len give the bursts
// the current batch needs (token addresses in reversed order).
module tellme_top
  import tellme_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // configuration bus
  input  logic          cfg_we,
  input  logic [2:0]    cfg_addr,
  input  logic [31:0]   cfg_wdata,
  output logic [31:0]   cfg_rdata,
  output logic          irq_done,
  // streams
  input  logic          s0_valid,
  output logic          s0_ready,
  input  fp16_vec_t     s0_data,
  input  logic          s1_valid,
  output logic          s1_ready,
  input  fp16_vec_t     s1_data,
  input  logic          s2_valid,
  output logic          s2_ready,
  input  fp16_vec_t     s2_data,
  input  logic          w_valid,
  output logic          w_ready,
  input  logic [767:0]  w_data,
  input  logic [2:0]    w_nvec,
  input  logic          w_rms,
  output logic          o_valid,
  input  logic          o_ready,
  output fp16_vec_t     o_data,
  output logic [15:0]   rpa_q_off,
  output logic [15:0]   rpa_q_len,
  output logic [15:0]   rpa_kv_off,
  output logic [15:0]   rpa_kv_len
);
  localparam int unsigned N_TOK = 1024;

  // ---- configuration ----
  logic start, busy, unit_done;
  logic [2:0] opc;
  logic [15:0] n, k, tokens;
  ew_op_e ew_op;
  proj_e  proj;
  fp16_t  wscale;
  logic [31:0] len;
  cfg_regs u_cfg (
    .clk (clk), .rst_n (rst_n), .we (cfg_we), .addr (cfg_addr), .wdata (cfg_wdata),
    .rdata (cfg_rdata), .busy (busy), .done_in (unit_done), .start (start),
    .opcode (opc), .n (n), .k (k), .tokens (tokens), .ew_op (ew_op), .proj (proj),
    .wscale (wscale), .len (len)
  );

  // ---- controller ----
  op_e op;
  logic run;
  logic [31:0] ld_cnt;
  logic fuse_done, rms_done, rpa_done, da_done, ld_done;
  assign busy = run;
  assign unit_done = run && (fuse_done || rms_done || rpa_done || da_done || ld_done);
  assign irq_done = unit_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; op <= OP_WLOAD;
    end else if (start) begin
      run <= 1'b1; op <= op_e'(opc);
    end else if (unit_done) run <= 1'b0;
  end
  logic sel_ld, sel_lin, sel_rms, sel_pre, sel_dec;
  assign sel_ld  = run && (op == OP_WLOAD);
  assign sel_lin = run && (op == OP_LINEAR);
  assign sel_rms = run && (op == OP_RMS);
  assign sel_pre = run && (op == OP_PREFILL);
  assign sel_dec = run && (op == OP_DECODE);

  // ---- weight buffer ----
  logic fw_valid;
  logic [15:0] fw_a, fw_b;
  widx_t fw_idx [Q];
  logic [$clog2(D_FFN/VEC)-1:0] rms_waddr;
  fp16_vec_t rms_wdata;
  logic ld_ready;
  wbmu u_wbmu (
    .clk (clk), .rst_n (rst_n),
    .ld_start (start && opc == 3'(OP_WLOAD)), .ld_valid (w_valid && sel_ld),
    .ld_data (w_data), .ld_nvec (w_nvec), .ld_rms (w_rms), .ld_ready (ld_ready),
    .rd_valid (fw_valid), .rd_proj (proj), .rd_a (fw_a), .rd_b (fw_b), .rd_idx (fw_idx),
    .rms_addr (rms_waddr), .rms_w (rms_wdata)
  );
  assign w_ready = sel_ld && ld_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ld_cnt <= '0;
    else if (start) ld_cnt <= '0;
    else if (w_valid && w_ready) ld_cnt <= ld_cnt + 32'd1;
  end
  assign ld_done = sel_ld && w_valid && w_ready && (ld_cnt == len - 32'd1);

  // ---- channel-wise max buffer ----
  logic max_we;
  logic [$clog2(N_TOK)-1:0] max_waddr, max_ra, max_rb;
  fp16_t max_wdata, max_da, max_db;
  chan_max_buf #(.N_TOK(N_TOK)) u_maxbuf (
    .clk (clk), .we (max_we), .waddr (max_waddr), .wdata (max_wdata),
    .raddr_a (max_ra), .rdata_a (max_da), .raddr_b (max_rb), .rdata_b (max_db)
  );

  // ---- TLMM-FUSE ----
  logic f_act_ready, f_y_ready, f_out_valid, f_busy;
  fp16_vec_t f_out;
  tlmm_fuse #(.N_TOK(N_TOK)) u_fuse (
    .clk (clk), .rst_n (rst_n), .start (start && opc == 3'(OP_LINEAR)),
    .cfg_n (n), .cfg_k (k), .cfg_tokens (tokens), .cfg_op (ew_op), .cfg_wscale (wscale),
    .busy (f_busy), .done (fuse_done),
    .act_valid (s0_valid && sel_lin), .act_ready (f_act_ready), .act_data (s0_data),
    .y_valid (s1_valid && sel_lin), .y_ready (f_y_ready), .y_data (s1_data),
    .out_valid (f_out_valid), .out_ready (o_ready && sel_lin), .out_data (f_out),
    .w_valid (fw_valid), .w_a (fw_a), .w_b (fw_b), .w_idx (fw_idx),
    .max_raddr_a (max_ra), .max_rdata_a (max_da), .max_raddr_b (max_rb), .max_rdata_b (max_db)
  );

  // ---- RMS-MAX ----
  logic r_in_ready, r_out_valid, r_busy;
  fp16_vec_t r_out;
  rms_max #(.N_TOK(N_TOK)) u_rms (
    .clk (clk), .rst_n (rst_n), .start (start && opc == 3'(OP_RMS)),
    .cfg_n (n), .cfg_tokens (tokens), .busy (r_busy), .done (rms_done),
    .in_valid (s0_valid && sel_rms), .in_ready (r_in_ready), .in_data (s0_data),
    .w_addr (rms_waddr), .w_data (rms_wdata),
    .out_valid (r_out_valid), .out_ready (o_ready && sel_rms), .out_data (r_out),
    .max_we (max_we), .max_addr (max_waddr), .max_data (max_wdata)
  );

  // ---- RPA ----
  logic p_q_ready, p_k_ready, p_v_ready, p_out_valid, p_busy;
  fp16_vec_t p_out;
  rpa u_rpa (
    .clk (clk), .rst_n (rst_n), .start (start && opc == 3'(OP_PREFILL)), .cfg_n (n),
    .busy (p_busy), .done (rpa_done),
    .q_off (rpa_q_off), .q_len (rpa_q_len), .kv_off (rpa_kv_off), .kv_len (rpa_kv_len),
    .q_valid (s0_valid && sel_pre), .q_ready (p_q_ready), .q_data (s0_data),
    .k_valid (s1_valid && sel_pre), .k_ready (p_k_ready), .k_data (s1_data),
    .v_valid (s2_valid && sel_pre), .v_ready (p_v_ready), .v_data (s2_data),
    .out_valid (p_out_valid), .out_ready (o_ready && sel_pre), .out_data (p_out)
  );

  // ---- DA ----
  logic d_q_ready, d_k_ready, d_v_ready, d_out_valid, d_busy;
  fp16_vec_t d_out;
  da u_da (
    .clk (clk), .rst_n (rst_n), .start (start && opc == 3'(OP_DECODE)), .cfg_n (n),
    .busy (d_busy), .done (da_done),
    .q_valid (s0_valid && sel_dec), .q_ready (d_q_ready), .q_data (s0_data),
    .k_valid (s1_valid && sel_dec), .k_ready (d_k_ready), .k_data (s1_data),
    .v_valid (s2_valid && sel_dec), .v_ready (d_v_ready), .v_data (s2_data),
    .out_valid (d_out_valid), .out_ready (o_ready && sel_dec), .out_data (d_out)
  );

  // ---- stream routing ----
  always_comb begin
    s0_ready = 1'b0; s1_ready = 1'b0; s2_ready = 1'b0; o_valid = 1'b0; o_data = '0;
    if (sel_lin) begin
      s0_ready = f_act_ready; s1_ready = f_y_ready; o_valid = f_out_valid; o_data = f_out;
    end
    if (sel_rms) begin
      s0_ready = r_in_ready; o_valid = r_out_valid; o_data = r_out;
    end
    if (sel_pre) begin
      s0_ready = p_q_ready; s1_ready = p_k_ready; s2_ready = p_v_ready;
      o_valid = p_out_valid; o_data = p_out;
    end
    if (sel_dec) begin
      s0_ready = d_q_ready; s1_ready = d_k_ready; s2_ready = d_v_ready;
      o_valid = d_out_valid; o_data = d_out;
    end
  end
endmodule
