// csa32: one row of full adders (3:2 carry-save compressor) of width W.
//
// Each bit column is a full adder taking in1, in2, in3; the sum word stays
// in place and the carry word is moved one column up. Bits pushed out of the
// top are dropped, so the pair (sum, carry) equals in1+in2+in3 modulo 2^W.
module csa32 #(
  parameter int W = 19
) (
  input  logic [W-1:0] in1,
  input  logic [W-1:0] in2,
  input  logic [W-1:0] in3,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);
  logic [W-1:0] maj;
  assign sum   = in1 ^ in2 ^ in3;
  assign maj   = (in1 & in2) | (in1 & in3) | (in2 & in3);
  assign carry = {maj[W-2:0], 1'b0};
endmodule
