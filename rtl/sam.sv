// sam: shift-and-multiplication cell, one of the nine in a neural element.
//
// Two 8-bit registers hold the input X and its negation -X; both load from
// the left neighbour when sh_en is high, so the values slide one cell to the
// right per input shift (x_q / negx_q feed the next cell). A decomposed
// weight is held stationary in eight small registers (s1_1, s1_2, s2_1, s2_2
// on 2 bits, n1_1, n1_2, n2_1, n2_2 on 3 bits), written when w_load is high.
// sel_k picks the k=1 pair (INT5, or first INT8 pass) or the k=2 pair
// (second INT8 pass). For each of the two terms a 3:1 mux selects X, -X or
// 0 by the sign code (MO_X1, MO_X2), and a barrel shifter shifts the
// sign-extended value left by n to give a 15-bit PSI. The PSIs are
// combinational from the registers. Structure, widths and signal names
// follow the source's SAM diagram; the sign code and reset to zero are this
// design's choices.
module sam
  import tma_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sh_en,
  input  logic [X_W-1:0]          x_in,
  input  logic [X_W-1:0]          negx_in,
  input  logic                    w_load,
  input  dec_w_t                  w_in,
  input  logic                    sel_k,    // 0: k=1 terms, 1: k=2 terms
  output logic [X_W-1:0]          x_q,
  output logic [X_W-1:0]          negx_q,
  output logic signed [PSI_W-1:0] psi1,
  output logic signed [PSI_W-1:0] psi2
);

  dec_w_t w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q    <= '0;
      negx_q <= '0;
    end else if (sh_en) begin
      x_q    <= x_in;
      negx_q <= negx_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      w_q <= '0;
    else if (w_load) w_q <= w_in;
  end

  sgn_t             s1_k, s2_k;
  logic [2:0]       n1_k, n2_k;
  logic [X_W-1:0]   mo_x1, mo_x2;

  // SEL_W_BIT muxes
  assign s1_k = sel_k ? w_q.s1_2 : w_q.s1_1;
  assign n1_k = sel_k ? w_q.n1_2 : w_q.n1_1;
  assign s2_k = sel_k ? w_q.s2_2 : w_q.s2_1;
  assign n2_k = sel_k ? w_q.n2_2 : w_q.n2_1;

  function automatic logic [X_W-1:0] mux3(sgn_t s, logic [X_W-1:0] x, logic [X_W-1:0] nx);
    case (s)
      S_POS:   return x;
      S_NEG:   return nx;
      default: return '0;
    endcase
  endfunction

  // logarithmic barrel shifter: stages of 1, 2 and 4 bit positions
  function automatic logic [PSI_W-1:0] bshift(logic [X_W-1:0] v, logic [2:0] n);
    logic [PSI_W-1:0] r;
    r = PSI_W'($signed(v));
    if (n[0]) r = {r[PSI_W-2:0], 1'b0};
    if (n[1]) r = {r[PSI_W-3:0], 2'b0};
    if (n[2]) r = {r[PSI_W-5:0], 4'b0};
    return r;
  endfunction

  assign mo_x1 = mux3(s1_k, x_q, negx_q);
  assign mo_x2 = mux3(s2_k, x_q, negx_q);
  assign psi1  = bshift(mo_x1, n1_k);
  assign psi2  = bshift(mo_x2, n2_k);

endmodule
