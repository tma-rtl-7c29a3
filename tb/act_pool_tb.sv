// act_pool_tb: ReLU, shift and saturation, and max pooling over 1..4
// consecutive results, against a model.
module act_pool_tb;
  import tma_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear, in_valid, act_valid;
  logic [4:0] act_shift;
  logic [2:0] pool_len;
  logic signed [31:0] din [4];
  logic [7:0] act [4];
  int checks = 0, failures = 0;
  act_pool u_dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    clear = 0; in_valid = 0; act_shift = 0; pool_len = 1;
    for (int c = 0; c < 4; c++) din[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int len = 1; len <= 4; len++) begin
      int m [4];
      int n, nout;
      pool_len = 3'(len);
      act_shift = 5'($urandom_range(12));
      clear = 1; @(negedge clk); clear = 0;
      n = 0; nout = 0;
      for (int it = 0; it < 200; it++) begin
        bit exp_v;
        in_valid = ($urandom_range(3) != 0);
        for (int c = 0; c < 4; c++) din[c] = int'($urandom_range(400000)) - 100000;
        exp_v = 0;
        if (in_valid) begin
          for (int c = 0; c < 4; c++) begin
            int q;
            q = (din[c] < 0) ? 0 : (((din[c] >>> act_shift) > 127) ? 127 : (din[c] >>> act_shift));
            m[c] = (n == 0 || q > m[c]) ? q : m[c];
          end
          n++;
          if (n == len) begin exp_v = 1; n = 0; end
        end
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (act_valid != exp_v) begin failures++; $display("FAIL act_valid len %0d", len); end
        if (exp_v) begin
          nout++;
          for (int c = 0; c < 4; c++) begin
            checks++;
            if (int'(act[c]) != m[c]) begin failures++; $display("FAIL act got %0d exp %0d", act[c], m[c]); end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
