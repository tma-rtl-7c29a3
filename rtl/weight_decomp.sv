// weight_decomp: splits a signed weight into signed powers of two.
//
// The weight is rewritten in non-adjacent form (NAF): for a = |w|,
// h = a >> 1, t = a + h, c = h ^ t, the positive digit mask is t & c and the
// negative digit mask is h & c, so a = (t & c) - (h & c) with no two adjacent
// non-zero digits. An 8-bit weight (|w| <= 128) has at most four non-zero
// digits, all at bit positions 0..7, so INT8 weights are exact. The digits
// are taken from the most significant down and placed in the order
// (s1_1,n1_1), (s2_1,n2_1), (s1_2,n1_2), (s2_2,n2_2). In INT5 mode only the
// first two are kept: the only 5-bit weights with three NAF digits are
// +-11 and +-13, which become +-12, exactly the error cases the source
// design lists for two PSIs. The NAF method is this design's choice; the
// source only gives the decomposed form. Purely combinational.
module weight_decomp
  import tma_pkg::*;
(
  input  logic signed [7:0] w,     // signed weight (INT5 uses -16..15)
  input  logic              int8,  // 1: four PSIs, 0: two PSIs
  output dec_w_t            dw
);

  logic [8:0] a, h, t, c, pmask, nmask;
  logic       neg;

  always_comb begin
    sgn_t       sg  [4];
    logic [2:0] pos [4];
    int         cnt;
    neg   = w[7];
    a     = neg ? 9'(-$signed({w[7], w})) : {1'b0, w};
    h     = a >> 1;
    t     = a + h;
    c     = h ^ t;
    pmask = t & c;
    nmask = h & c;
    for (int i = 0; i < 4; i++) begin
      sg[i]  = S_ZERO;
      pos[i] = 3'd0;
    end
    cnt = 0;
    for (int b = 7; b >= 0; b--) begin
      if ((pmask[b] | nmask[b]) && cnt < 4) begin
        sg[cnt]  = ((pmask[b] != 1'b0) ^ neg) ? S_POS : S_NEG;
        pos[cnt] = 3'(b);
        cnt      = cnt + 1;
      end
    end
    if (!int8) begin
      sg[2] = S_ZERO; pos[2] = 3'd0;
      sg[3] = S_ZERO; pos[3] = 3'd0;
    end
    dw.s1_1 = sg[0]; dw.n1_1 = pos[0];
    dw.s2_1 = sg[1]; dw.n2_1 = pos[1];
    dw.s1_2 = sg[2]; dw.n1_2 = pos[2];
    dw.s2_2 = sg[3]; dw.n2_2 = pos[3];
  end

endmodule
