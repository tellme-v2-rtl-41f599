// tb_fp_pkg: testbench-only conversions between real numbers and the FP16 /
// FP32 bit patterns the accelerator uses, built on IEEE double bit patterns
// so that reference values are worked out independently of the RTL's
// floating-point functions.
package tb_fp_pkg;
  function automatic real f32_to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction
  function automatic logic [31:0] real_to_f32(input real r);
    logic [63:0] d;
    logic [10:0] e;
    logic [24:0] m;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    e = d[62:52];
    m = {1'b0, 1'b1, d[51:29]} + {24'd0, d[28]};
    if (m[24]) begin m = m >> 1; e = e + 11'd1; end
    if (e <= 11'd896) return {d[63], 31'd0};
    return {d[63], 8'(e - 11'd896), m[22:0]};
  endfunction
  function automatic real f16_to_real(input logic [15:0] h);
    if (h[14:10] == 5'd0) return 0.0;
    return f32_to_real({h[15], 8'(h[14:10]) + 8'd112, h[9:0], 13'd0});
  endfunction
  function automatic logic [15:0] real_to_f16(input real r);
    logic [31:0] f;
    logic [11:0] m;
    logic [7:0] e;
    f = real_to_f32(r);
    if (f[30:23] <= 8'd112) return {f[31], 15'd0};
    m = {1'b0, 1'b1, f[22:13]} + {11'd0, f[12]};
    e = f[30:23];
    if (m[11]) begin m = m >> 1; e = e + 8'd1; end
    if (e >= 8'd143) return {f[31], 15'h7BFF};
    return {f[31], 5'(e - 8'd112), m[9:0]};
  endfunction
  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction
  // relative-or-absolute closeness test
  function automatic bit close(input real got, input real want, input real rel, input real abs_tol);
    return fabs(got - want) <= rel * fabs(want) + abs_tol;
  endfunction
endpackage
