// psi_acc_tb: checks load on sel_k = 0, accumulate on sel_k = 1, hold when
// en is low, against a model of the register.
module psi_acc_tb;
  import tma_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en, sel_k;
  logic signed [18:0] moa;
  logic signed [19:0] o;
  int checks = 0, failures = 0;
  psi_acc u_dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int m, expv;
    en = 0; sel_k = 0; moa = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expv = 0;
    for (int it = 0; it < 1000; it++) begin
      m = int'($urandom_range(400000)) - 200000;
      moa = 19'(m);
      en = ($urandom_range(3) != 0);
      sel_k = $urandom_range(1) != 0;
      @(negedge clk);
      if (en) expv = sel_k ? int'($signed(20'(expv + m))) : m;
      checks++;
      if (o != 20'(expv)) begin failures++; $display("FAIL got %0d exp %0d", o, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
