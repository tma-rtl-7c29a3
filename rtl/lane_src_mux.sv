// lane_src_mux: selects what a lane FIFO receives.
//
// A lane either takes fresh data from the SRAM side or reuses the input row
// that another lane has just shifted out of the rightmost NE (feedback, FB).
// fb[j] is FB(N+j) of the source's vertical-stride mux: the row shifted out
// of lane N+1+j. With stride_vert = s-1 the lane takes FB(N+s-1), so the
// next sweep of lane N sees the row s positions further down, which gives a
// vertical convolution stride of s (1..4). Combinational.
module lane_src_mux
  import tma_pkg::*;
(
  input  logic           use_sram,
  input  logic [1:0]     stride_vert,   // vertical stride minus one
  input  logic [X_W-1:0] sram_x,
  input  logic [X_W-1:0] fb [4],
  output logic [X_W-1:0] y
);
  always_comb begin
    if (use_sram) y = sram_x;
    else          y = fb[stride_vert];
  end
endmodule
