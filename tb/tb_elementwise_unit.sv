// tb_elementwise_unit: runs 200 random word pairs through each of the four
// operations (bypass, SiLU-gate, residual add, RoPE) with random valid and
// ready on all streams, and compares every lane with a real-number reference
// (FP16 tolerance). Also checks that y is not consumed in bypass mode.
module tb_elementwise_unit;
  import tellme_pkg::*;
  import tb_fp_pkg::*;
  localparam int NW = 200;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  ew_op_e op;
  logic x_valid, x_ready, y_valid, y_ready, out_valid, out_ready;
  fp16_vec_t x_data, y_data, out_data;
  real XR [NW][VEC], YR [NW][VEC];
  int ycons = 0;
  elementwise_unit dut (.*);

  function automatic real ref_lane(input ew_op_e o, input int w, input int i);
    real x, y, c, s, xe, xo;
    x = XR[w][i]; y = YR[w][i];
    c = YR[w][i & ~1]; s = YR[w][i | 1]; xe = XR[w][i & ~1]; xo = XR[w][i | 1];
    case (o)
      EW_SILU: return x / (1.0 + $exp(-x)) * y;
      EW_ADD:  return x + y;
      EW_ROPE: return (i % 2 == 0) ? xe * c - xo * s : xo * c + xe * s;
      default: return x;
    endcase
  endfunction

  always @(posedge clk) if (y_valid && y_ready) ycons++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x_valid = 0; y_valid = 0; out_ready = 0; x_data = '0; y_data = '0; op = EW_BYPASS;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int oi = 0; oi < 4; oi++) begin
      op = ew_op_e'(oi);
      ycons = 0;
      for (int w = 0; w < NW; w++)
        for (int i = 0; i < VEC; i++) begin
          XR[w][i] = f16_to_real(real_to_f16((real'($urandom % 4001) - 2000.0) / 500.0));
          YR[w][i] = f16_to_real(real_to_f16((real'($urandom % 4001) - 2000.0) / 2000.0));
        end
      fork
        for (int w = 0; w < NW; w++) begin
          for (int i = 0; i < VEC; i++) x_data[i] = real_to_f16(XR[w][i]);
          x_valid = 1'b1;
          @(negedge clk);
          while (!x_ready) @(negedge clk);
          @(posedge clk); #1 x_valid = 1'b0;
          if ($urandom % 2) begin @(posedge clk); #1; end
        end
        if (op != EW_BYPASS)
          for (int w = 0; w < NW; w++) begin
            for (int i = 0; i < VEC; i++) y_data[i] = real_to_f16(YR[w][i]);
            y_valid = 1'b1;
            @(negedge clk);
            while (!y_ready) @(negedge clk);
            @(posedge clk); #1 y_valid = 1'b0;
            if ($urandom % 2) begin @(posedge clk); #1; end
          end
        for (int w = 0; w < NW; w++) begin
          out_ready = 1'($urandom % 2);
          @(negedge clk);
          while (!(out_valid && out_ready)) begin @(posedge clk); #1 out_ready = 1'($urandom % 2); @(negedge clk); end
          for (int i = 0; i < VEC; i++) begin
            checks++;
            if (!close(f16_to_real(out_data[i]), ref_lane(op, w, i), 2.0/1024, 2e-3)) begin
              failures++;
              if (failures < 6) $display("op %0d w %0d i %0d got %f want %f", oi, w, i,
                                         f16_to_real(out_data[i]), ref_lane(op, w, i));
            end
          end
          @(posedge clk); #1 out_ready = 1'b0;
        end
      join
      checks++;
      if (ycons != ((op == EW_BYPASS) ? 0 : NW)) begin failures++; $display("y consumed %0d", ycons); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
