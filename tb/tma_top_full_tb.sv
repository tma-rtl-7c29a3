// tma_top_full_tb: the end-to-end test of tma_top_harness on the core with
// every parameter at its default (16 channels per lane, 224-deep FIFOs) and
// 224-pixel input rows, the widest AlexNet row: 3x3 INT5 with activation and
// pooling, 3x3 INT8 with vertical stride 2 and stalls, 6x6, 12x12 and FC,
// plus the INT5/INT8 shift-rate check; see tma_top_harness.
module tma_top_full_tb;
  tma_top_harness #(
    .N_CH(16), .FIFO_DEPTH(224), .W(224), .NSTRIPE(2), .FULL(1'b1), .ALL_TESTS(1'b1),
    .WATCHDOG(200000)
  ) u_h ();
endmodule
