// psi_acc: PSI accumulation register at the output of a neural element.
//
// With INT5 weights each input shift needs one pass and the register just
// takes the MOA18 result. With INT8 weights a shift takes two passes: the
// pass with sel_k = 0 (k=1 terms) loads the register and the pass with
// sel_k = 1 (k=2 terms) adds to it, so after the second pass the register
// holds sum over k of O_k. The register only changes when en is high.
// Output is registered: it is valid the cycle after the last pass.
// Reset to zero is this design's choice.
module psi_acc
  import tma_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      sel_k,
  input  logic signed [MOA18_W-1:0] moa,
  output logic signed [NEO_W-1:0]   o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     o <= '0;
    else if (en) begin
      if (!sel_k)   o <= NEO_W'(moa);
      else          o <= o + NEO_W'(moa);
    end
  end
endmodule
