// weight_decomp_tb: exhaustive check of the weight decomposition.
// INT8: every weight -128..127 must be reproduced exactly by its four terms.
// INT5: every weight -16..15 must be reproduced by the first two terms,
// except +-11 and +-13, which must come out as +-12; the k=2 terms must be
// zero. Also checks that no two non-zero terms share a bit position.
module weight_decomp_tb;
  import tma_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic signed [7:0] w;
  logic              int8;
  dec_w_t            dw;
  int checks = 0, failures = 0;

  weight_decomp u_dut (.w(w), .int8(int8), .dw(dw));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, expv;
    int8 = 1'b1;
    for (int i = -128; i < 128; i++) begin
      w = 8'(i); #1;
      v = term_val(dw.s1_1, dw.n1_1) + term_val(dw.s2_1, dw.n2_1)
        + term_val(dw.s1_2, dw.n1_2) + term_val(dw.s2_2, dw.n2_2);
      checks++;
      if (v != i) begin failures++; $display("FAIL int8 w=%0d got %0d", i, v); end
      checks++;
      if ((dw.s1_1 != S_ZERO && dw.s2_1 != S_ZERO && dw.n1_1 == dw.n2_1) ||
          (dw.s1_2 != S_ZERO && dw.s2_2 != S_ZERO && dw.n1_2 == dw.n2_2)) begin
        failures++; $display("FAIL int8 w=%0d repeated position", i);
      end
    end
    int8 = 1'b0;
    for (int i = -16; i < 16; i++) begin
      w = 8'(i); #1;
      v = term_val(dw.s1_1, dw.n1_1) + term_val(dw.s2_1, dw.n2_1);
      expv = (i == 11 || i == 13) ? 12 : (i == -11 || i == -13) ? -12 : i;
      checks++;
      if (v != expv) begin failures++; $display("FAIL int5 w=%0d got %0d exp %0d", i, v, expv); end
      checks++;
      if (dw.s1_2 != S_ZERO || dw.s2_2 != S_ZERO) begin
        failures++; $display("FAIL int5 w=%0d uses k=2 terms", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
