// tlmm_engine: ternary table-lookup matrix multiplication (TLMM).
//
// Computes o = a * W for each token, a = n INT8 activations, W an n x k
// ternary matrix stored as 5-bit indices of groups of G=3 weights, packed T=28
// to a 140-bit index vector. Loop nest, as in the paper's schedule:
//   for each token                      (outer loop, prefill channels)
//     for r in 0 .. n/(T*G)-1           (one T*G = 84-element activation slice)
//       accept the slice, fill T TL tables from it      (1 cycle)
//       for c in 0 .. k/Q-1             (look-up loop, II = 1)
//         read Q index vectors (row r, columns c*Q .. c*Q+Q-1) from the
//         weight buffer, look up Q x T partial sums, add the T sums of each
//         column into the INT32 output buffer (size k)
//   on the last slice the finished sums leave as 16-lane INT32 words instead
//   of being written back ("Accum & Output").
// Latency per token: R * (k/Q + 1) cycles, R = n/(T*G), plus 2 cycles drain.
//
// Weight port: wreq_* is issued in one cycle; the Q index vectors must be on
// wrsp_idx in the next cycle (one-cycle URAM read). Output back-pressure is
// handled by issuing a last-slice look-up only while the output FIFO has room
// for it and the one in flight.
module tlmm_engine
  import tellme_pkg::*;
#(
  parameter int unsigned K_MAX = D_FFN_P    // output buffer size (largest k)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration, held while busy
  input  logic                 start,
  input  logic [15:0]          cfg_rows,     // R = n / (T*G)
  input  logic [15:0]          cfg_kq,       // k / Q
  input  logic [15:0]          cfg_tokens,
  output logic                 busy,
  output logic                 done,         // one-cycle pulse
  // activation slices
  input  logic                 act_valid,
  output logic                 act_ready,
  input  int8_tg_t             act_data,
  // weight buffer access
  output logic                 wreq_valid,
  output logic [15:0]          wreq_a,       // first input element of the slice
  output logic [15:0]          wreq_b,       // first output column
  input  widx_t                wrsp_idx [Q],
  // results
  output logic                 out_valid,
  input  logic                 out_ready,
  output int32_vec_t           out_data
);
  localparam int unsigned KQ_MAX = (K_MAX + Q - 1) / Q;
  localparam int unsigned FD = 4;

  typedef enum logic [1:0] {S_IDLE, S_ACT, S_LOOK} state_e;
  state_e state;
  logic [15:0] r, c, tok;
  logic s1_valid, s1_last;
  logic [15:0] s1_c;
  int32_vec_t out_buf [KQ_MAX];

  // ---- T TL tables -------------------------------------------------------
  logic signed [7:0]       tab_act [T][G];
  logic [B_IDX-1:0]        tab_idx [T][Q];
  logic signed [B_TB-1:0]  tab_val [T][Q];
  logic tab_load;

  always_comb begin
    for (int t = 0; t < T; t++) begin
      for (int g = 0; g < G; g++) tab_act[t][g] = act_data[t*G + g];
      for (int q = 0; q < Q; q++) tab_idx[t][q] = wrsp_idx[q][t*B_IDX +: B_IDX];
    end
  end

  for (genvar t = 0; t < T; t++) begin : g_tab
    tl_table u_tab (
      .clk (clk), .load (tab_load), .act (tab_act[t]),
      .idx (tab_idx[t]), .val (tab_val[t])
    );
  end

  // ---- control ------------------------------------------------------------
  logic [$clog2(FD+1)-1:0] fifo_cnt;
  logic fifo_in_ready;
  logic last_row, issue, room;
  int32_vec_t acc_new;

  assign last_row  = (r == cfg_rows - 16'd1);
  assign act_ready = (state == S_ACT);
  assign tab_load  = act_valid && act_ready;
  assign room      = !last_row || (32'(fifo_cnt) + (s1_valid && s1_last ? 1 : 0) < FD - 1);
  assign issue     = (state == S_LOOK) && room;
  assign wreq_valid = issue;
  assign wreq_a    = 16'(r * TG);
  assign wreq_b    = 16'(c * Q);
  assign busy      = (state != S_IDLE) || s1_valid || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; r <= '0; c <= '0; tok <= '0;
      s1_valid <= 1'b0; s1_last <= 1'b0; s1_c <= '0; done <= 1'b0;
    end else begin
      done     <= 1'b0;
      s1_valid <= issue;
      s1_last  <= last_row;
      s1_c     <= c;
      case (state)
        S_IDLE: if (start) begin state <= S_ACT; r <= '0; c <= '0; tok <= '0; end
        S_ACT:  if (act_valid) begin state <= S_LOOK; c <= '0; end
        S_LOOK: if (issue) begin
          if (c == cfg_kq - 16'd1) begin
            c <= '0;
            if (!last_row) begin
              r <= r + 16'd1; state <= S_ACT;
            end else if (tok == cfg_tokens - 16'd1) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              r <= '0; tok <= tok + 16'd1; state <= S_ACT;
            end
          end else c <= c + 16'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- look-up, reduce over T, accumulate ------------------------------
  // s1_first: the slice in stage 1 is the first of its token (r was 0 when
  // issued); r may already have moved on, so it is tracked separately.
  logic s1_first;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) s1_first <= 1'b0; else s1_first <= (r == 16'd0);

  always_comb begin
    for (int q = 0; q < Q; q++) begin
      int32_t sum;
      sum = s1_first ? 32'sd0 : out_buf[s1_c][q];
      for (int t = 0; t < T; t++) sum = sum + 32'(tab_val[t][q]);
      acc_new[q] = sum;
    end
  end

  always_ff @(posedge clk)
    if (s1_valid && !s1_last) out_buf[s1_c] <= acc_new;

  stream_fifo #(.WIDTH($bits(int32_vec_t)), .DEPTH(FD)) u_out (
    .clk (clk), .rst_n (rst_n),
    .in_valid (s1_valid && s1_last), .in_ready (fifo_in_ready), .in_data (acc_new),
    .out_valid (out_valid), .out_ready (out_ready), .out_data (out_data),
    .count (fifo_cnt)
  );

  assert property (@(posedge clk) disable iff (!rst_n) (s1_valid && s1_last) |-> fifo_in_ready);
endmodule
