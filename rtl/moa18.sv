// moa18: multi-operand adder for the 18 PSIs of one neural element.
//
// The 18 signed 15-bit PSIs enter without sign extension, as 15-bit
// unsigned patterns in a 19-bit column space. A signed value v with pattern
// u equals u - 2^15 when negative, so the sum of all 18 equals
// sum(u) - NUM_P * 2^15, with NUM_P the number of negative PSIs. Modulo
// 2^19 this is sum(u) + N_NUM_P * 2^15 with N_NUM_P = (-NUM_P) mod 16, the
// 4-bit 2's complement of NUM_P placed at bits 15..18. Because no PSI has a
// bit in columns 15..18, N_NUM_P is carried in those free columns of the
// first operand word, and the 18 words are reduced by full-adder rows
// (3 -> 2 per group) to two words that a carry-lookahead adder adds.
// The result O[18:0] is the exact signed sum whenever it fits in 19 bits.
// The sign-extension trick, widths and the final CLA follow the source; the
// exact wiring of full adders into stages is this design's (the generic
// tree takes six full-adder stages for 18 words, the source speaks of five).
// Combinational.
module moa18
  import tma_pkg::*;
(
  input  logic signed [PSI_W-1:0]   psi [18],
  input  logic [4:0]                num_p,  // number of negative PSIs
  output logic signed [MOA18_W-1:0] o
);

  logic [3:0]         n_num_p;
  logic [MOA18_W-1:0] ops [18];
  logic [MOA18_W-1:0] sum;

  assign n_num_p = 4'(~num_p + 5'd1);

  for (genvar i = 0; i < 18; i++) begin : g_ops
    if (i == 0) begin : g_first
      assign ops[i] = {n_num_p, psi[i]};
    end else begin : g_rest
      assign ops[i] = {4'b0000, psi[i]};
    end
  end

  csa_tree #(.N(18), .W(MOA18_W)) u_tree (
    .ops(ops),
    .sum(sum)
  );

  assign o = $signed(sum);

endmodule
