// lane_fifo_tb: random push/pop against a queue model, including push and
// pop together on a full FIFO.
module lane_fifo_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  localparam int D = 5;
  logic push, pop, empty, full;
  logic [7:0] din, dout;
  logic [2:0] count;
  int checks = 0, failures = 0;
  int q [$];
  lane_fifo #(.DEPTH(D), .W(8)) u_dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int nfullpp = 0;
    push = 0; pop = 0; din = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      pop  = (q.size() > 0) && ($urandom_range(2) != 0);
      push = (q.size() < D || pop) && ($urandom_range(2) != 0);
      din  = 8'($urandom);
      checks++;
      if (q.size() > 0 && int'(dout) != q[0]) begin failures++; $display("FAIL head %0d exp %0d", dout, q[0]); end
      checks++;
      if (int'(count) != q.size() || empty != (q.size() == 0) || full != (q.size() == D)) begin
        failures++; $display("FAIL count %0d exp %0d", count, q.size());
      end
      if (full && push && pop) nfullpp++;
      @(negedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(int'(din));
    end
    checks++;
    if (nfullpp == 0) begin failures++; $display("FAIL full push+pop never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
