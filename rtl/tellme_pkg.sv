// tellme_pkg: shared parameters, stream vector types and floating-point
// functions of the ternary LLM accelerator.
//
// The table-lookup matmul parameters (G=3, T=28, Q=16, 5-bit index, 140-bit
// index vector, 16 FP16 values per 256-bit stream word) are the published
// configuration. The model dimensions (d_model=1536, d_ffn=4096, 16 heads of
// 96) are those of the 0.73B BitNet model the accelerator runs; they are not
// printed in the paper.
//
// Floating point: every FP16 operation is done by widening both operands to
// FP32, computing in FP32 and rounding back. The FP32 helpers are
// combinational, flush subnormals to zero, saturate overflow to infinity and
// round to nearest (ties away from zero). exp() uses 2^x = 2^i * 2^f with a
// cubic polynomial for 2^f (relative error below 2e-4), which is a design
// choice: the paper only says exponentials run on DSPs.
package tellme_pkg;

  // ---------------- table-lookup matmul configuration ----------------
  localparam int unsigned G      = 3;    // ternary weights per group
  localparam int unsigned T      = 28;   // TL tables (groups per index vector)
  localparam int unsigned Q      = 16;   // index vectors read per cycle
  localparam int unsigned B_IDX  = 5;    // ceil(log2(3^G))
  localparam int unsigned N_TB   = 27;   // 3^G table entries
  localparam int unsigned B_TB   = 10;   // 8 + ceil(log2 G)
  localparam int unsigned TG     = T * G;          // 84 INT8 per TLMM input
  localparam int unsigned WIDX_W = T * B_IDX;      // 140-bit index vector
  localparam int unsigned VEC    = 16;             // FP16 lanes per 256-bit word

  // ---------------- model (BitNet 0.73B) ----------------
  localparam int unsigned D_MODEL   = 1536;
  localparam int unsigned D_FFN     = 4096;
  localparam int unsigned N_HEAD    = 16;
  localparam int unsigned D_HEAD    = 96;
  localparam int unsigned D_MODEL_P = 1596;  // d_model padded to a multiple of T*G
  localparam int unsigned D_FFN_P   = 4116;  // d_ffn padded to a multiple of T*G

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;
  typedef fp16_t [VEC-1:0]       fp16_vec_t;   // one 256-bit stream word
  typedef logic signed [31:0]    int32_t;
  typedef int32_t [VEC-1:0]      int32_vec_t;
  typedef logic signed [7:0]     int8_t;
  typedef int8_t [TG-1:0]        int8_tg_t;    // one TLMM input vector
  typedef logic [WIDX_W-1:0]     widx_t;

  // projection kinds seen by the weight buffer address translation
  typedef enum logic [1:0] {
    PROJ_QKVO = 2'd0,
    PROJ_UP   = 2'd1,   // also the gate projection
    PROJ_DOWN = 2'd2
  } proj_e;

  // element-wise operation after dequantisation
  typedef enum logic [1:0] {
    EW_BYPASS = 2'd0,
    EW_SILU   = 2'd1,   // silu(x) * y  (SwiGLU)
    EW_ADD    = 2'd2,   // x + y        (residual)
    EW_ROPE   = 2'd3    // consecutive-pair rotary embedding
  } ew_op_e;

  // commands of the top-level controller
  typedef enum logic [2:0] {
    OP_WLOAD   = 3'd0,   // load one layer's weights into the weight buffer
    OP_LINEAR  = 3'd1,   // ternary linear layer with fused element-wise op
    OP_RMS     = 3'd2,   // RMSNorm + per-token absmax
    OP_PREFILL = 3'd3,   // reversed prefill attention
    OP_DECODE  = 3'd4    // decode attention
  } op_e;

  localparam fp32_t F32_ONE   = 32'h3F80_0000;
  localparam fp32_t F32_ZERO  = 32'h0000_0000;
  localparam fp32_t F32_NEGINF = 32'hFF80_0000;
  localparam fp32_t F32_LOG2E = 32'h3FB8_AA3B;   // 1.4426950
  localparam fp32_t F32_127   = 32'h42FE_0000;   // 127.0

  // ---------------- conversions ----------------
  function automatic fp32_t f16_to_f32(input fp16_t h);
    if (h[14:10] == 5'd0)  return {h[15], 31'd0};
    if (h[14:10] == 5'd31) return {h[15], 8'hFF, 23'd0};
    return {h[15], 8'(h[14:10]) + 8'd112, h[9:0], 13'd0};
  endfunction

  function automatic fp16_t f32_to_f16(input fp32_t f);
    logic signed [9:0] e;
    logic [11:0] m;
    e = $signed({2'b00, f[30:23]}) - 10'sd112;
    if (f[30:23] == 8'hFF || e >= 10'sd31) return {f[31], 5'd31, 10'd0};
    if (e <= 10'sd0) return {f[31], 15'd0};
    m = {1'b0, 1'b1, f[22:13]} + {11'd0, f[12]};
    if (m[11]) begin
      e = e + 10'sd1;
      if (e >= 10'sd31) return {f[31], 5'd31, 10'd0};
      return {f[31], e[4:0], m[10:1]};
    end
    return {f[31], e[4:0], m[9:0]};
  endfunction

  function automatic fp32_t f32_from_int(input logic signed [31:0] v);
    logic [31:0] a;
    logic [63:0] sh;
    int p;
    logic [24:0] m;
    logic [7:0] e;
    if (v == 0) return F32_ZERO;
    a = v[31] ? 32'(-v) : 32'(v);
    p = 0;
    for (int i = 0; i < 32; i++) if (a[i]) p = i;
    sh = {32'd0, a} << (40 - p);            // leading one at bit 40
    m  = {1'b0, sh[40:17]} + {24'd0, sh[16]};
    e  = 8'(127 + p);
    if (m[24]) begin m = m >> 1; e = e + 8'd1; end
    return {v[31], e, m[22:0]};
  endfunction

  // round to nearest integer, saturating to +/-limit
  function automatic logic signed [31:0] f32_to_int_sat(input fp32_t f, input int limit);
    int ex;
    logic [63:0] mag;
    logic [31:0] r;
    if (f[30:23] < 8'd126) return 0;                  // |f| < 0.5
    ex = int'(f[30:23]) - 127;
    if (ex > 30) r = 32'(limit);
    else begin
      mag = ((64'({1'b1, f[22:0]}) << (ex + 1)) + 64'd8388608) >> 24;
      r = (mag > 64'(limit)) ? 32'(limit) : mag[31:0];
    end
    return f[31] ? -$signed(r) : $signed(r);
  endfunction

  // ---------------- arithmetic ----------------
  function automatic fp32_t f32_mul(input fp32_t a, input fp32_t b);
    logic s;
    logic signed [10:0] e;
    logic [47:0] p;
    logic [24:0] m;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = $signed({3'b000, a[30:23]}) + $signed({3'b000, b[30:23]}) - 11'sd127;
    if (p[47]) begin
      m = {1'b0, p[47:24]} + {24'd0, p[23]};
      e = e + 11'sd1;
    end else begin
      m = {1'b0, p[46:23]} + {24'd0, p[22]};
    end
    if (m[24]) begin m = m >> 1; e = e + 11'sd1; end
    if (e >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 11'sd0) return {s, 31'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

  function automatic fp32_t f32_add(input fp32_t a, input fp32_t b);
    fp32_t x, y;
    logic [7:0] d;
    logic [27:0] mx, my, ms;
    logic signed [10:0] e;
    int p;
    logic [24:0] m;
    if (a[30:23] == 8'd0) return b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end else begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = (d > 8'd26) ? 28'd0 : ({1'b0, 1'b1, y[22:0], 3'b000} >> d);
    e  = $signed({3'b000, x[30:23]});
    if (x[31] == y[31]) ms = mx + my;
    else                ms = mx - my;
    if (ms == 28'd0) return F32_ZERO;
    p = 0;
    for (int i = 0; i < 28; i++) if (ms[i]) p = i;
    // normalise so the leading one sits at bit 26
    if (p > 26) ms = ms >> (p - 26);
    else        ms = ms << (26 - p);
    e = e + 11'(p - 26);
    m = {1'b0, ms[26:3]} + {24'd0, ms[2]};
    if (m[24]) begin m = m >> 1; e = e + 11'sd1; end
    if (e >= 11'sd255) return {x[31], 8'hFF, 23'd0};
    if (e <= 11'sd0) return F32_ZERO;
    return {x[31], e[7:0], m[22:0]};
  endfunction

  function automatic fp32_t f32_sub(input fp32_t a, input fp32_t b);
    return f32_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic fp32_t f32_div(input fp32_t a, input fp32_t b);
    logic s;
    logic signed [10:0] e;
    logic [49:0] q;
    logic [24:0] m;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'hFF) return {s, 31'd0};
    if (b[30:23] == 8'd0 || a[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    q = ({1'b1, a[22:0], 26'd0}) / {26'd0, 1'b1, b[22:0]};   // in [2^25, 2^27)
    e = $signed({3'b000, a[30:23]}) - $signed({3'b000, b[30:23]}) + 11'sd127;
    if (q[26]) m = {1'b0, q[26:3]} + {24'd0, q[2]};
    else begin m = {1'b0, q[25:2]} + {24'd0, q[1]}; e = e - 11'sd1; end
    if (m[24]) begin m = m >> 1; e = e + 11'sd1; end
    if (e >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 11'sd0) return {s, 31'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

  function automatic fp32_t f32_sqrt(input fp32_t a);
    logic signed [10:0] e;
    logic [47:0] rad;
    logic [23:0] r;
    if (a[31] || a[30:23] == 8'd0) return F32_ZERO;
    e = $signed({3'b000, a[30:23]}) - 11'sd127;
    // rad = 1.f * 2^46, or 1.f * 2^47 for an odd exponent; sqrt(rad) = 1.x * 2^23
    if (e[0]) begin rad = {1'b1, a[22:0], 24'd0}; e = e - 11'sd1; end
    else      rad = {1'b0, 1'b1, a[22:0], 23'd0};
    r = 24'd0;
    for (int i = 23; i >= 0; i--) begin
      logic [23:0] t;
      t = r | (24'd1 << i);
      if (48'(t) * 48'(t) <= rad) r = t;
    end
    e = (e >>> 1) + 11'sd127;
    return {1'b0, e[7:0], r[22:0]};
  endfunction

  function automatic logic f32_gt(input fp32_t a, input fp32_t b);
    if (a[31] != b[31]) return !a[31] && (a[30:0] != 0 || b[30:0] != 0);
    if (!a[31]) return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic fp32_t f32_max(input fp32_t a, input fp32_t b);
    return f32_gt(a, b) ? a : b;
  endfunction

  // e^x = 2^(x*log2 e); 2^f on [0,1) by a cubic polynomial in Q2.24
  function automatic fp32_t f32_exp(input fp32_t x);
    fp32_t y;
    int ey;
    logic signed [63:0] fx;    // y in Q.24
    logic signed [63:0] ip;
    logic [23:0] f;
    logic [63:0] p;
    logic [25:0] mp;
    if (x[30:23] == 8'd0) return F32_ONE;
    y  = f32_mul(x, F32_LOG2E);
    ey = int'(y[30:23]) - 127;
    if (ey >= 7) return y[31] ? F32_ZERO : {1'b0, 8'hFF, 23'd0};
    if (ey < -24) return F32_ONE;
    fx = 64'({1'b1, y[22:0]});               // 1.f * 2^23
    if (ey >= -1) fx = fx <<< (ey + 1); else fx = fx >>> (-ey - 1);  // now Q.24
    if (y[31]) fx = -fx;
    ip = fx >>> 24;                          // floor
    f  = fx[23:0];
    // 2^f ~ 1 + f*(0.6951786 + f*(0.2261251 + f*0.0781020))
    p = (64'(f) * 64'd1310325) >> 24;                        // 0.0781020
    p = (64'(f) * (p + 64'd3793752)) >> 24;                 // 0.2261251
    p = (64'(f) * (p + 64'd11662940)) >> 24;                // 0.6951786
    mp = 26'(p) + 26'd16777216;                              // 1.x in Q.24
    if (ip + 127 <= 0) return F32_ZERO;
    if (ip + 127 >= 255) return {1'b0, 8'hFF, 23'd0};
    if (mp[25]) return {1'b0, 8'(ip + 128), 23'd0};
    return {1'b0, 8'(ip + 127), mp[23:1]};
  endfunction

  // FP16 wrappers
  function automatic fp16_t h_mul(input fp16_t a, input fp16_t b);
    return f32_to_f16(f32_mul(f16_to_f32(a), f16_to_f32(b)));
  endfunction
  function automatic fp16_t h_add(input fp16_t a, input fp16_t b);
    return f32_to_f16(f32_add(f16_to_f32(a), f16_to_f32(b)));
  endfunction
  function automatic fp16_t h_sub(input fp16_t a, input fp16_t b);
    return f32_to_f16(f32_sub(f16_to_f32(a), f16_to_f32(b)));
  endfunction
  // silu(x) = x / (1 + e^-x)
  function automatic fp32_t f32_silu(input fp32_t x);
    return f32_div(x, f32_add(F32_ONE, f32_exp({~x[31], x[30:0]})));
  endfunction

endpackage
