// wbmu_addr: address translation of the weight buffer management unit.
//
// The TLMM engine asks for index vectors by a 2D software index (a, b):
// a = first input element of a T*G slice, b = output column. The weight
// buffer is one flat array of index vectors, shaped
// [ceil(d_ffn'/d_model'), d_model'/(T*G), d_model] (x, y, z). Following the
// paper's mapping:
//   q/k/v/o projection : x = 0,            y = a mod d_model', z = b mod d_model
//   up / gate          : x = b / d_model,  y = a mod d_model', z = b mod d_model
//   down               : x = a / d_model', y = a mod d_model', z = b mod d_model
// y is then divided by T*G, because one index vector covers T*G inputs (the
// paper indexes y in elements and sizes the array in vectors; this unit does
// the division). Indices start at 0 here; the paper counts from 1.
// flat = (x * (d_model'/(T*G)) + y) * d_model + z. Purely combinational.
module wbmu_addr
  import tellme_pkg::*;
#(
  parameter int unsigned DM   = D_MODEL,
  parameter int unsigned DM_P = D_MODEL_P,
  parameter int unsigned AW   = 17
) (
  input  proj_e          proj,
  input  logic [15:0]    a,
  input  logic [15:0]    b,
  output logic [1:0]     x,
  output logic [15:0]    y,
  output logic [15:0]    z,
  output logic [AW-1:0]  flat
);
  localparam int unsigned YN = DM_P / TG;
  always_comb begin
    unique case (proj)
      PROJ_UP:   x = 2'(b / DM);
      PROJ_DOWN: x = 2'(a / DM_P);
      default:   x = 2'd0;
    endcase
    y    = 16'((a % DM_P) / TG);
    z    = 16'(b % DM);
    flat = AW'((32'(x) * YN + 32'(y)) * DM + 32'(z));
  end
endmodule
