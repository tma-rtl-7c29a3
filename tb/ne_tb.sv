// ne_tb: one neural element with random decomposed weights and three random
// input rows, in INT5 timing (one pass per shift) and INT8 timing (two
// passes). After shift t the SAM at row i, position p must hold element
// t-1-p of row i; the output must equal the 3x3 dot product of those with
// the weights' values over the passes used.
module ne_tb;
  import tma_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic sh_en, sel_k, eval_en, w_load;
  logic [7:0] x_in [3], negx_in [3], x_out [3], negx_out [3];
  dec_w_t w_in [3][3];
  logic signed [19:0] o;
  int checks = 0, failures = 0;
  int s [3][64];

  ne u_dut (.*);

  function automatic sgn_t rs();
    case ($urandom_range(2))
      0: return S_ZERO;
      1: return S_POS;
      default: return S_NEG;
    endcase
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sh_en = 0; sel_k = 0; eval_en = 0; w_load = 0;
    for (int i = 0; i < 3; i++) begin x_in[i] = 0; negx_in[i] = 0; end
    for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++) w_in[i][p] = '0;
    for (int mode8 = 0; mode8 < 2; mode8++) begin
      rst_n = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      for (int i = 0; i < 3; i++) for (int j = 0; j < 64; j++) s[i][j] = int'($urandom_range(254)) - 127;
      for (int i = 0; i < 3; i++)
        for (int p = 0; p < 3; p++)
          w_in[i][p] = {rs(), 3'($urandom), rs(), 3'($urandom), rs(), 3'($urandom), rs(), 3'($urandom)};
      w_load = 1; @(negedge clk); w_load = 0;
      for (int t = 1; t <= 40; t++) begin
        int e;
        sh_en = 1;
        for (int i = 0; i < 3; i++) begin x_in[i] = 8'(s[i][t-1]); negx_in[i] = 8'(-s[i][t-1]); end
        @(negedge clk);
        sh_en = 0; eval_en = 1; sel_k = 0;
        @(negedge clk);
        if (mode8 == 1) begin sel_k = 1; @(negedge clk); end
        eval_en = 0; sel_k = 0;
        e = 0;
        for (int i = 0; i < 3; i++)
          for (int p = 0; p < 3; p++) begin
            int x, wv;
            x = (t - 1 - p >= 0) ? s[i][t-1-p] : 0;
            wv = term_val(w_in[i][p].s1_1, w_in[i][p].n1_1) + term_val(w_in[i][p].s2_1, w_in[i][p].n2_1);
            if (mode8 == 1)
              wv += term_val(w_in[i][p].s1_2, w_in[i][p].n1_2) + term_val(w_in[i][p].s2_2, w_in[i][p].n2_2);
            e += wv * x;
          end
        checks++;
        if (int'(o) != e) begin failures++; $display("FAIL int8=%0d t=%0d got %0d exp %0d", mode8, t, o, e); end
        for (int i = 0; i < 3; i++) begin
          int xo;
          xo = (t >= 3) ? s[i][t-3] : 0;
          checks++;
          if ($signed(x_out[i]) != 8'(xo) || $signed(negx_out[i]) != 8'(-xo)) begin
            failures++; $display("FAIL x_out row %0d", i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
