// moa66_tb: random check of the column adder (64 NE outputs + Psum + Bias).
module moa66_tb;
  import tma_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic signed [19:0] ne_o [64];
  logic signed [31:0] psum, bias, sum;
  int checks = 0, failures = 0;
  moa66 u_dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int it = 0; it < 500; it++) begin
      longint s;
      s = 0;
      for (int i = 0; i < 64; i++) begin
        int v;
        v = int'($urandom_range(1 << 20)) - (1 << 19);
        if (v == (1 << 19)) v = 0;
        ne_o[i] = 20'(v);
        s += v;
      end
      psum = int'($urandom_range(20000000)) - 10000000;
      bias = int'($urandom_range(20000)) - 10000;
      s += psum + bias;
      #1;
      checks++;
      if (longint'(sum) != s) begin failures++; $display("FAIL got %0d exp %0d", sum, s); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
