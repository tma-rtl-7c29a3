// sam_tb: random check of one SAM cell.
// Loads random decomposed weights and inputs, checks PSI1/PSI2 of both
// passes against s*2^n*X, that X/-X only move on sh_en, and that the
// weight register only changes on w_load.
module sam_tb;
  import tma_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic sh_en, w_load, sel_k;
  logic [7:0] x_in, negx_in, x_q, negx_q;
  dec_w_t w_in;
  logic signed [14:0] psi1, psi2;
  int checks = 0, failures = 0;

  sam u_dut (.*);

  function automatic sgn_t rs();
    case ($urandom_range(3))
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
    int x, xold;
    dec_w_t wcur;
    sh_en = 0; w_load = 0; sel_k = 0; x_in = 0; negx_in = 0; w_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    xold = 0; wcur = '0;
    for (int it = 0; it < 400; it++) begin
      x = int'($urandom_range(254)) - 127;
      x_in = 8'(x); negx_in = 8'(-x);
      sh_en = ($urandom_range(3) != 0);
      w_load = ($urandom_range(1) != 0);
      w_in = {rs(), 3'($urandom), rs(), 3'($urandom), rs(), 3'($urandom), rs(), 3'($urandom)};
      @(negedge clk);
      if (sh_en) xold = x;
      if (w_load) wcur = w_in;
      sh_en = 0; w_load = 0;
      for (int k = 0; k < 2; k++) begin
        int e1, e2;
        sel_k = k[0]; #1;
        e1 = (k == 0) ? term_val(wcur.s1_1, wcur.n1_1) * xold : term_val(wcur.s1_2, wcur.n1_2) * xold;
        e2 = (k == 0) ? term_val(wcur.s2_1, wcur.n2_1) * xold : term_val(wcur.s2_2, wcur.n2_2) * xold;
        checks += 3;
        if (psi1 != 15'(e1)) begin failures++; $display("FAIL psi1 got %0d exp %0d", psi1, e1); end
        if (psi2 != 15'(e2)) begin failures++; $display("FAIL psi2 got %0d exp %0d", psi2, e2); end
        if ($signed(x_q) != 8'(xold) || $signed(negx_q) != 8'(-xold)) begin
          failures++; $display("FAIL x_q %0d exp %0d", $signed(x_q), xold);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
