// tb_wbmu_addr: checks the (a, b) -> (x, y, z) -> flat translation for the
// three projection kinds against the mapping worked out in the testbench,
// over random and corner indices.
module tb_wbmu_addr;
  import tellme_pkg::*;
  int checks = 0, failures = 0;
  proj_e proj;
  logic [15:0] a, b, y, z;
  logic [1:0] x;
  logic [16:0] flat;
  wbmu_addr dut (.proj, .a, .b, .x, .y, .z, .flat);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int ex, ey, ez, ef, ia, ib;
      proj = proj_e'(i % 3);
      case (proj)
        PROJ_QKVO: begin ia = TG * ($urandom % (D_MODEL_P / TG)); ib = $urandom % D_MODEL; end
        PROJ_UP:   begin ia = TG * ($urandom % (D_MODEL_P / TG)); ib = $urandom % D_FFN_P; end
        default:   begin ia = TG * ($urandom % (D_FFN_P / TG));   ib = $urandom % D_MODEL; end
      endcase
      if (i < 3) begin ia = 0; ib = 0; end
      a = 16'(ia); b = 16'(ib);
      #1;
      ex = (proj == PROJ_UP) ? ib / 1536 : (proj == PROJ_DOWN) ? ia / 1596 : 0;
      ey = (ia % 1596) / 84;
      ez = ib % 1536;
      ef = (ex * 19 + ey) * 1536 + ez;
      checks++;
      if (int'(x) != ex || int'(y) != ey || int'(z) != ez || int'(flat) != ef) begin
        failures++;
        if (failures < 5) $display("proj %0d a %0d b %0d: got %0d %0d %0d %0d want %0d %0d %0d %0d",
                                   proj, ia, ib, x, y, z, flat, ex, ey, ez, ef);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
