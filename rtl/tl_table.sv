// tl_table: one table-lookup (TL) table of the ternary matmul engine, with the
// precompute tree that fills it.
//
// On `load` the G INT8 activations a[0..G-1] are turned into all 3^G signed
// partial sums sum_g w_g*a[g], w_g in {-1,0,+1}, and stored (B_TB = 8 +
// ceil(log2 G) bits each, so nothing overflows). The table then answers Q
// lookups per cycle combinationally: val[q] = table[idx[q]].
//
// Index encoding (this design's choice; the paper only says a group of G
// ternary weights becomes a ceil(log2 3^G)-bit index): idx = sum_g
// (w_g + 1) * 3^g, i.e. base-3 digits with digit 0 = -1, 1 = 0, 2 = +1.
// Indices 27..31 read as zero. The paper stores Q copies of each table so
// that Q reads can proceed in parallel; here one register table has Q read
// ports, which is the same function.
// Timing: the table written at the clock edge with load=1 is read from the
// next cycle on.
module tl_table
  import tellme_pkg::*;
#(
  parameter int unsigned GN  = G,
  parameter int unsigned QN  = Q,
  parameter int unsigned IW  = B_IDX,
  parameter int unsigned EW  = B_TB
) (
  input  logic                       clk,
  input  logic                       load,
  input  logic signed [7:0]          act [GN],
  input  logic [IW-1:0]              idx [QN],
  output logic signed [EW-1:0]       val [QN]
);
  localparam int unsigned NE = 3 ** GN;
  logic signed [EW-1:0] table_q [NE];

  // precompute tree: entry e combines each activation with the digit of e
  always_ff @(posedge clk) begin
    if (load) begin
      for (int e = 0; e < NE; e++) begin
        logic signed [EW-1:0] s;
        int r;
        s = '0;
        r = e;
        for (int g = 0; g < GN; g++) begin
          case (r % 3)
            0:       s = s - EW'(act[g]);
            2:       s = s + EW'(act[g]);
            default: s = s;
          endcase
          r = r / 3;
        end
        table_q[e] <= s;
      end
    end
  end

  always_comb begin
    for (int q = 0; q < QN; q++)
      val[q] = (int'(idx[q]) < NE) ? table_q[idx[q]] : '0;
  end
endmodule
