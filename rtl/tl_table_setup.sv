// tl_table_setup: precompute unit of the table-lookup ternary matmul.
//
// From G int8 activations a[0..G-1] it forms all 3^G signed combinations
//   table[idx] = sum_g w_g * a[g],  w_g in {-1, 0, +1},
// where idx is the base-3 number whose digit g is (w_g + 1); digit 0 is the
// least significant. With the paper's G = 3 this is 27 adders/subtractors
// producing 27 entries (Sec. III-A). The unit is purely combinational; the TL
// matmul registers its output as the look-up table.
// Follows the paper: G, the 3^G combinations, full (not half) storage.
// Own choice: the digit order of the index and the entry width ACT_W+clog2(G)+1.
module tl_table_setup #(
  parameter int unsigned G     = 3,
  parameter int unsigned ACT_W = 8,
  localparam int unsigned NENT  = 3**G,
  localparam int unsigned ENT_W = ACT_W + $clog2(G) + 1
) (
  input  logic signed [ACT_W-1:0] act   [G],
  output logic signed [ENT_W-1:0] table_o [NENT]
);

  always_comb begin
    for (int unsigned idx = 0; idx < NENT; idx++) begin
      logic signed [ENT_W-1:0] acc;
      int unsigned rem;
      acc = '0;
      rem = idx;
      for (int unsigned g = 0; g < G; g++) begin
        case (rem % 3)
          0:       acc = acc - ENT_W'(act[g]);
          2:       acc = acc + ENT_W'(act[g]);
          default: acc = acc;
        endcase
        rem = rem / 3;
      end
      table_o[idx] = acc;
    end
  end

endmodule
