// cla_adder: W-bit carry-lookahead adder, the final stage of the
// multi-operand adders.
//
// Bits are grouped by four; inside a group every carry is computed directly
// from the generate/propagate terms and the group carry-in (two-level
// lookahead), groups are chained. Result is a + b modulo 2^W. Combinational.
module cla_adder #(
  parameter int W = 19
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s
);
  localparam int NG = (W + 3) / 4;
  localparam int WP = NG * 4;

  logic [WP-1:0] ap, bp, g, p, sp;
  logic [NG:0]   gc;
  logic [WP-1:0] c;

  assign ap = WP'(a);
  assign bp = WP'(b);
  assign g  = ap & bp;
  assign p  = ap ^ bp;
  assign gc[0] = 1'b0;

  for (genvar k = 0; k < NG; k++) begin : g_grp
    localparam int B = 4 * k;
    assign c[B]   = gc[k];
    assign c[B+1] = g[B] | (p[B] & gc[k]);
    assign c[B+2] = g[B+1] | (p[B+1] & g[B]) | (p[B+1] & p[B] & gc[k]);
    assign c[B+3] = g[B+2] | (p[B+2] & g[B+1]) | (p[B+2] & p[B+1] & g[B])
                  | (p[B+2] & p[B+1] & p[B] & gc[k]);
    assign gc[k+1] = g[B+3] | (p[B+3] & g[B+2]) | (p[B+3] & p[B+2] & g[B+1])
                   | (p[B+3] & p[B+2] & p[B+1] & g[B])
                   | (p[B+3] & p[B+2] & p[B+1] & p[B] & gc[k]);
  end

  assign sp = p ^ c;
  assign s  = sp[W-1:0];
endmodule
