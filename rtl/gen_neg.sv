// gen_neg: 2's complement generator at the entry of an array lane.
//
// Produces -X for the byte X that leaves the lane FIFO, so that each SAM can
// store both X and -X and never negate on its own. Combinational.
// Wrap-around for X = -128 (result -128) is accepted: activations are
// expected in -127..127.
module gen_neg
  import tma_pkg::*;
(
  input  logic [X_W-1:0] x,
  output logic [X_W-1:0] neg_x
);
  assign neg_x = (~x) + X_W'(1);
endmodule
