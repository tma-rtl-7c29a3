// act_pool: activation and pooling of final sums before they become the
// next layer's input.
//
// For each of the four result channels a final sum is rectified (ReLU),
// scaled down by an arithmetic right shift of act_shift bits and saturated
// to 127, giving a non-negative 8-bit activation. Pooling takes the maximum
// over pool_len (1..4, 0 counts as 1) consecutive valid results of a
// channel, i.e. max pooling along the output stream; act_valid pulses with
// the pooled value one cycle after the last contributing input. clear
// restarts a pooling window. ReLU, the shift-and-saturate requantisation and
// stream max pooling are this design's choices: the source only names the
// block. Two-dimensional pooling windows need row buffers the source does
// not describe and are not built.
module act_pool
  import tma_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic [4:0]               act_shift,
  input  logic [2:0]               pool_len,
  input  logic                     in_valid,
  input  logic signed [PSUM_W-1:0] din [4],
  output logic                     act_valid,
  output logic [X_W-1:0]           act [4]
);
  logic [X_W-1:0] q [4];
  logic [X_W-1:0] mx [4];
  logic [2:0]     n, len;

  assign len = (pool_len == 3'd0) ? 3'd1 : (pool_len > 3'd4 ? 3'd4 : pool_len);

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      logic signed [PSUM_W-1:0] sh;
      sh = din[i] >>> act_shift;
      if (din[i] < 0)            q[i] = '0;
      else if (sh > 127)         q[i] = 8'd127;
      else                       q[i] = sh[X_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n         <= '0;
      act_valid <= 1'b0;
      for (int i = 0; i < 4; i++) begin
        mx[i]  <= '0;
        act[i] <= '0;
      end
    end else begin
      act_valid <= 1'b0;
      if (clear) begin
        n <= '0;
      end else if (in_valid) begin
        for (int i = 0; i < 4; i++) begin
          logic [X_W-1:0] m;
          m = (n == 3'd0 || q[i] > mx[i]) ? q[i] : mx[i];
          mx[i] <= m;
          if (n + 3'd1 == len) act[i] <= m;
        end
        if (n + 3'd1 == len) begin
          n         <= '0;
          act_valid <= 1'b1;
        end else begin
          n <= n + 3'd1;
        end
      end
    end
  end
endmodule
