// psum_tree_tb: the three modes of the Psum adders.
module psum_tree_tb;
  import tma_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  arr_mode_t mode;
  logic signed [31:0] p3 [4], psum [4];
  logic [2:0] n_out;
  int checks = 0, failures = 0;
  psum_tree u_dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int it = 0; it < 300; it++) begin
      int a [4];
      int e [4];
      int en;
      for (int c = 0; c < 4; c++) begin a[c] = int'($urandom_range(2000000)) - 1000000; p3[c] = a[c]; end
      case (it % 3)
        0: begin mode = MODE_3X3; en = 4; e = a; end
        1: begin mode = MODE_6X6; en = 2; e = '{a[0] + a[1], a[2] + a[3], 0, 0}; end
        default: begin mode = MODE_12X12; en = 1; e = '{a[0] + a[1] + a[2] + a[3], 0, 0, 0}; end
      endcase
      #1;
      checks++;
      if (int'(n_out) != en) begin failures++; $display("FAIL n_out %0d", n_out); end
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (psum[c] != e[c]) begin failures++; $display("FAIL mode %0d out %0d got %0d exp %0d", mode, c, psum[c], e[c]); end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
