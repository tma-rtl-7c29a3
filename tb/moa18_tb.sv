// moa18_tb: random check of the 18-operand adder.
// Random signed 15-bit operands (full range, and small ones) with NUM_P
// counted here; the result must equal the true sum modulo 2^19, and exactly
// when the sum fits in 19 bits.
module moa18_tb;
  import tma_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic signed [14:0] psi [18];
  logic [4:0] num_p;
  logic signed [18:0] o;
  int checks = 0, failures = 0;

  moa18 u_dut (.psi(psi), .num_p(num_p), .o(o));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int s, np;
      s = 0; np = 0;
      for (int i = 0; i < 18; i++) begin
        int v;
        case (it % 3)
          0: v = int'($urandom_range(32767)) - 16384;
          1: v = int'($urandom_range(2000)) - 1000;
          default: v = (it % 2 == 0) ? -16384 : 16383;
        endcase
        psi[i] = 15'(v);
        s += v;
        if (v < 0) np++;
      end
      num_p = 5'(np);
      #1;
      checks++;
      if (o != 19'(s)) begin failures++; $display("FAIL sum %0d got %0d", s, o); end
      if (s >= -262144 && s < 262144) begin
        checks++;
        if (int'(o) != s) begin failures++; $display("FAIL exact %0d got %0d", s, o); end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
