// csa_tree: Wallace-style reduction of N operand words of width W to one sum.
//
// Stage by stage, operands are taken three at a time into a row of full
// adders (csa32), each group of three becoming two; one or two operands left
// over pass to the next stage unchanged. When two words remain, a
// carry-lookahead adder (cla_adder) adds them. The number of words after
// stage s follows r(s+1) = 2*floor(r(s)/3) + r(s) mod 3. All arithmetic is
// modulo 2^W: operands must already be sign-handled by the user.
// Combinational.
module csa_tree #(
  parameter int N = 18,
  parameter int W = 19
) (
  input  logic [W-1:0] ops [N],
  output logic [W-1:0] sum
);

  function automatic int rows_after(int r);
    return 2 * (r / 3) + (r % 3);
  endfunction

  function automatic int num_stages(int n);
    int r, s;
    r = n; s = 0;
    while (r > 2) begin r = rows_after(r); s++; end
    return s;
  endfunction

  function automatic int rows_at(int n, int st);
    int r;
    r = n;
    for (int i = 0; i < st; i++) r = rows_after(r);
    return r;
  endfunction

  localparam int NS = num_stages(N);
  localparam int NP = (N < 2) ? 2 : N;

  // one word array per stage, so that no signal spans several stages
  for (genvar st = 0; st <= NS; st++) begin : g_st
    localparam int R = rows_at(NP, st);
    logic [W-1:0] v [R];
    if (st == 0) begin : g_in
      for (genvar i = 0; i < R; i++) begin : g_op
        if (i < N) begin : g_used
          assign v[i] = ops[i];
        end else begin : g_pad
          assign v[i] = '0;
        end
      end
    end else begin : g_red
      localparam int RP = rows_at(NP, st - 1);
      localparam int G  = RP / 3;
      for (genvar gi = 0; gi < G; gi++) begin : g_fa
        csa32 #(.W(W)) u_csa (
          .in1  (g_st[st-1].v[3*gi]),
          .in2  (g_st[st-1].v[3*gi+1]),
          .in3  (g_st[st-1].v[3*gi+2]),
          .sum  (v[2*gi]),
          .carry(v[2*gi+1])
        );
      end
      for (genvar j = 0; j < RP % 3; j++) begin : g_pass
        assign v[2*G+j] = g_st[st-1].v[3*G+j];
      end
    end
  end

  cla_adder #(.W(W)) u_cla (
    .a(g_st[NS].v[0]),
    .b(g_st[NS].v[1]),
    .s(sum)
  );

endmodule
