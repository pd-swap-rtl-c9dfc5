// tlmm_precompute: builds the lookup tables of the table-lookup matmul.
//
// The activation chunk holds NG groups of G int8 values. For every group the
// module forms all 3^G sums w0*a0 + w1*a1 + ... over ternary weights
// w in {-1, 0, +1}; the entry index is the weights read as a base-3 number of
// digits (w+1), most significant digit first. A packed weight index stored in
// the weight buffer then selects the group's dot product directly, so the
// runtime matmul is index -> lookup -> accumulate. Purely combinational.
// The precompute-then-lookup scheme follows the architecture; the group size
// G = 2 and the index encoding are this implementation's choice.
module tlmm_precompute #(
  parameter int unsigned G  = 2,
  parameter int unsigned NG = 8,
  localparam int unsigned TE = 3 ** G,           // entries per table
  localparam int unsigned TW = 8 + $clog2(G) + 1 // entry width
) (
  input  logic signed [7:0]    act   [NG*G],
  output logic signed [TW-1:0] table_o [NG][TE]
);
  always_comb begin
    for (int g = 0; g < NG; g++) begin
      for (int e = 0; e < TE; e++) begin
        int rest;
        logic signed [TW-1:0] s;
        rest = e;
        s    = '0;
        // digit for element G-1 is the least significant base-3 digit
        for (int k = G - 1; k >= 0; k--) begin
          case (rest % 3)
            0:       s = s - TW'(act[g*G + k]);
            2:       s = s + TW'(act[g*G + k]);
            default: ;
          endcase
          rest = rest / 3;
        end
        table_o[g][e] = s;
      end
    end
  end
endmodule
