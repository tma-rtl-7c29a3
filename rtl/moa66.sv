// moa66: column adder of the NE array.
//
// Adds the outputs of the NIN neural elements of one array column (64 =
// 4 NE rows x 16 channels by default) together with a Psum read back from
// memory and a Bias, giving Psum3x3 of that column. The NE outputs are
// sign-extended to PSUM_W bits and reduced by the same full-adder tree and
// carry-lookahead adder as the MOA18. Sign extension here (rather than the
// negative-count trick of the MOA18) is this design's choice; the source
// only says what the block sums. Combinational.
module moa66
  import tma_pkg::*;
#(
  parameter int NIN = 64
) (
  input  logic signed [NEO_W-1:0]  ne_o [NIN],
  input  logic signed [PSUM_W-1:0] psum,
  input  logic signed [PSUM_W-1:0] bias,
  output logic signed [PSUM_W-1:0] sum
);
  logic [PSUM_W-1:0] ops [NIN+2];
  logic [PSUM_W-1:0] s;

  for (genvar i = 0; i < NIN; i++) begin : g_ext
    assign ops[i] = PSUM_W'(ne_o[i]);
  end
  assign ops[NIN]   = psum;
  assign ops[NIN+1] = bias;

  csa_tree #(.N(NIN + 2), .W(PSUM_W)) u_tree (
    .ops(ops),
    .sum(s)
  );
  assign sum = $signed(s);
endmodule
