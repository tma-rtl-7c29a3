// tma_top_tb: end-to-end test of the core at reduced size (2 channels per
// lane, 8-deep FIFOs, 8-pixel rows) through all modes; see tma_top_harness.
module tma_top_tb;
  tma_top_harness #(
    .N_CH(2), .FIFO_DEPTH(8), .W(8), .NSTRIPE(3), .FULL(1'b0), .ALL_TESTS(1'b1),
    .WATCHDOG(100000)
  ) u_h ();
endmodule
