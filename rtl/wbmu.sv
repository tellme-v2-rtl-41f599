// wbmu: weight buffer management unit with the URAM weight buffer.
//
// Buffer: the index-vector array (140-bit vectors) is cyclically partitioned
// over NB = Q/2 = 8 banks, bank = flat mod 8, row = flat / 8. Each bank stands
// for a cascade of two 72-bit URAMs (144 bits >= 140) that is DEPTH = 3 x 4096
// deep, so U = 8 x 2 x 3 = 48 URAMs, the published count. A bank has two
// ports, as a URAM does: port A and port B. Q = 16 consecutive vectors starting
// at a flat address that is a multiple of 16 sit in rows r and r+1 of all 8
// banks, so port A reads row r and port B row r+1: Q vectors per cycle.
//
// Weight Load: one 768-bit beat from the three HP ports (HP0, HP1, HP3)
// carries five index vectors (bits 140*j +: 140, j = 0..4) and one FP16
// RMSNorm weight (bits 767:752). The five vectors go to five consecutive flat
// addresses, which fall in five different banks, through port A in the same
// cycle; the RMSNorm weight goes to the RMS weight buffer. The paper writes
// ceil((768-16)/(T*B)) vectors per beat, which is 6, but also "up to five"
// vectors, and six do not fit in 752 bits; this unit follows "five". Loading
// and access are not overlapped: the controller loads all of a linear layer's
// weights, then computes ("a single pack of DDR loading requests").
//
// Weight Access: request (proj, a, b) in a cycle; the Q vectors are on
// rd_idx the next cycle. RMS weights are read combinationally, 16 per word.
module wbmu
  import tellme_pkg::*;
#(
  parameter int unsigned NB    = Q / 2,
  parameter int unsigned DEPTH = 3 * 4096,
  parameter int unsigned NRMS  = D_FFN,
  parameter int unsigned DM    = D_MODEL,
  parameter int unsigned DM_P  = D_MODEL_P
) (
  input  logic              clk,
  input  logic              rst_n,
  // load side
  input  logic              ld_start,          // resets the load pointers
  input  logic              ld_valid,
  input  logic [767:0]      ld_data,
  input  logic [2:0]        ld_nvec,           // index vectors in this beat (0..5)
  input  logic              ld_rms,            // this beat carries an RMS weight
  output logic              ld_ready,
  // access side
  input  logic              rd_valid,
  input  proj_e             rd_proj,
  input  logic [15:0]       rd_a,
  input  logic [15:0]       rd_b,
  output widx_t             rd_idx [Q],
  // RMSNorm weight buffer read
  input  logic [$clog2(NRMS/VEC)-1:0] rms_addr,   // word address (16 weights)
  output fp16_vec_t         rms_w
);
  localparam int unsigned RW = $clog2(DEPTH);
  localparam int unsigned FW = $clog2(NB * DEPTH);

  widx_t bank [NB][DEPTH];
  fp16_t rms_buf [NRMS];
  logic [FW-1:0] ld_ptr;
  logic [$clog2(NRMS)-1:0] rms_ptr;

  assign ld_ready = 1'b1;

  // ---- load (port A writes) --------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_ptr <= '0; rms_ptr <= '0;
    end else if (ld_start) begin
      ld_ptr <= '0; rms_ptr <= '0;
    end else if (ld_valid) begin
      ld_ptr <= ld_ptr + FW'(ld_nvec);
      if (ld_rms) rms_ptr <= rms_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (ld_valid && !ld_start) begin
      for (int j = 0; j < 5; j++) begin
        if (j < int'(ld_nvec)) begin
          logic [FW-1:0] fa;
          fa = ld_ptr + FW'(j);
          bank[fa % FW'(NB)][RW'(fa / FW'(NB))] <= ld_data[j*WIDX_W +: WIDX_W];
        end
      end
      if (ld_rms) rms_buf[rms_ptr] <= ld_data[767:752];
    end
  end

  always_comb for (int i = 0; i < VEC; i++) rms_w[i] = rms_buf[32'(rms_addr) * VEC + i];

  // ---- access (ports A and B reads) -------------------------------------
  logic [16:0] flat;
  logic [1:0]  ax;
  logic [15:0] ay, az;
  wbmu_addr #(.DM(DM), .DM_P(DM_P), .AW(17)) u_addr (
    .proj (rd_proj), .a (rd_a), .b (rd_b), .x (ax), .y (ay), .z (az), .flat (flat)
  );

  logic [RW-1:0] row_a;
  assign row_a = RW'(flat / 17'(NB));

  always_ff @(posedge clk) begin
    if (rd_valid) begin
      for (int k = 0; k < NB; k++) begin
        rd_idx[k]      <= bank[k][row_a];           // port A
        rd_idx[k + NB] <= bank[k][row_a + 1'b1];    // port B
      end
    end
  end

  // a Q-wide access must start on a Q-aligned flat address
  assert property (@(posedge clk) disable iff (!rst_n) rd_valid |-> (flat % Q == 0));
endmodule
