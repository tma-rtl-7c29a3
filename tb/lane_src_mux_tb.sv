// lane_src_mux_tb: SRAM selection and each of the four stride feedbacks.
module lane_src_mux_tb;
  import tma_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic use_sram;
  logic [1:0] stride_vert;
  logic [7:0] sram_x, y;
  logic [7:0] fb [4];
  int checks = 0, failures = 0;
  lane_src_mux u_dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int it = 0; it < 200; it++) begin
      int e;
      use_sram = $urandom_range(1) != 0;
      stride_vert = 2'($urandom);
      sram_x = 8'($urandom);
      for (int j = 0; j < 4; j++) fb[j] = 8'($urandom);
      #1;
      e = use_sram ? int'(sram_x) : int'(fb[stride_vert]);
      checks++;
      if (int'(y) != e) begin failures++; $display("FAIL y=%0d exp %0d", y, e); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
