// gen_neg_tb: exhaustive check of the 2's complement generator.
module gen_neg_tb;
  import tma_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [7:0] x, nx;
  int checks = 0, failures = 0;
  gen_neg u_dut (.x(x), .neg_x(nx));
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = -128; i < 128; i++) begin
      x = 8'(i); #1;
      checks++;
      if ($signed(nx) != 8'(-i)) begin failures++; $display("FAIL x=%0d got %0d", i, $signed(nx)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
