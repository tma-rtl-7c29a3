// tma_top: multiplier-less inference accelerator core.
//
// The core computes convolution and fully connected layers with 8-bit
// activations and INT5 or INT8 weights without any multiplier: every weight
// is stored as two or four signed powers of two, each product is formed by
// barrel shifters, and the partial products are summed by carry-save
// multi-operand adders. It contains
//  - nine weight_decomp units on the weight load path: a raw 3x3 slice of
//    signed weights (wl_w) is decomposed and written into NE wl_ne, channel
//    wl_ch of the array;
//  - the ne_array (4x4 NEs x N_CH channels, 12 lane FIFOs per channel with
//    SRAM/feedback selection, four MOA66 column adders, the Psum adders);
//  - tma_ctrl, which turns step requests into input shifts and INT8 second
//    passes and tells when a result is ready (every shift, or every 12th
//    in FC mode);
//  - an output register and act_pool for the activation/pooling path.
// The on-chip SRAM and the DRAM are outside: the SRAM side pushes lane data
// (x_push, x_data), answers psum_req with psum_in/bias_in in the same cycle,
// and takes psum_out (partial sums) or act_out (final, activated values).
// Timing: step accepted in cycle t (ready high) -> psum_req in t+2 (INT5)
// or t+3 (INT8) -> out_valid in the following cycle -> act_valid, after
// pool_len results, one cycle later. Configuration inputs must be stable
// while the array works; clear restarts the shift count.
module tma_top
  import tma_pkg::*;
#(
  parameter int N_CH       = 16,
  parameter int FIFO_DEPTH = 224,
  parameter int IDX_W      = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  arr_mode_t                 cfg_mode,
  input  logic                      cfg_int8,
  input  logic                      cfg_fc,
  input  logic [LANES-1:0]          cfg_lane_sram,
  input  logic [1:0]                cfg_stride_vert,
  input  logic [4:0]                cfg_act_shift,
  input  logic [2:0]                cfg_pool_len,
  input  logic                      clear,
  // weight load (raw signed weights, decomposed on the way in)
  input  logic                      wl_valid,
  input  logic [3:0]                wl_ne,
  input  logic [$clog2(N_CH+1)-1:0] wl_ch,
  input  logic signed [7:0]         wl_w [3][3],
  // input data from the SRAM side
  input  logic [LANES-1:0]          x_push,
  input  logic [X_W-1:0]            x_data [LANES][N_CH],
  // input shifts
  input  logic                      step,
  output logic                      ready,
  // Psum / Bias read-back
  output logic                      psum_req,
  output logic [IDX_W-1:0]          psum_req_idx,
  input  logic signed [PSUM_W-1:0]  psum_in [4],
  input  logic signed [PSUM_W-1:0]  bias_in [4],
  // results
  output logic                      out_valid,
  output logic [IDX_W-1:0]          out_idx,
  output logic [2:0]                out_n,
  output logic signed [PSUM_W-1:0]  psum_out [4],
  output logic                      act_valid,
  output logic [X_W-1:0]            act_out [4],
  output logic                      fifo_empty_any
);

  dec_w_t wdec [3][3];
  for (genvar i = 0; i < 3; i++) begin : g_wi
    for (genvar p = 0; p < 3; p++) begin : g_wp
      weight_decomp u_wd (
        .w   (wl_w[i][p]),
        .int8(cfg_int8),
        .dw  (wdec[i][p])
      );
    end
  end

  logic             sh_en, eval_en, sel_k, cap, busy;
  logic [IDX_W-1:0] cap_idx;

  tma_ctrl #(.IDX_W(IDX_W)) u_ctrl (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (clear),
    .int8   (cfg_int8),
    .fc     (cfg_fc),
    .step   (step),
    .ready  (ready),
    .sh_en  (sh_en),
    .eval_en(eval_en),
    .sel_k  (sel_k),
    .cap    (cap),
    .cap_idx(cap_idx),
    .busy   (busy)
  );

  logic signed [PSUM_W-1:0] arr_out [4];
  logic [2:0]               arr_n;

  ne_array #(.N_CH(N_CH), .FIFO_DEPTH(FIFO_DEPTH)) u_array (
    .clk           (clk),
    .rst_n         (rst_n),
    .mode          (cfg_mode),
    .lane_sram     (cfg_lane_sram),
    .stride_vert   (cfg_stride_vert),
    .sram_push     (x_push),
    .sram_x        (x_data),
    .sh_en         (sh_en),
    .sel_k         (sel_k),
    .eval_en       (eval_en),
    .w_load        (wl_valid),
    .w_ne          (wl_ne),
    .w_ch          (wl_ch),
    .w_in          (wdec),
    .psum_in       (psum_in),
    .bias_in       (bias_in),
    .psum_out      (arr_out),
    .n_out         (arr_n),
    .fifo_empty_any(fifo_empty_any)
  );

  assign psum_req     = cap;
  assign psum_req_idx = cap_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_n     <= '0;
      psum_out  <= '{default: '0};
    end else begin
      out_valid <= cap;
      if (cap) begin
        out_idx  <= cap_idx;
        out_n    <= arr_n;
        psum_out <= arr_out;
      end
    end
  end

  act_pool u_act (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (clear),
    .act_shift(cfg_act_shift),
    .pool_len (cfg_pool_len),
    .in_valid (out_valid),
    .din      (psum_out),
    .act_valid(act_valid),
    .act      (act_out)
  );

  // weights may only change while no shift is in flight
  a_wload_idle: assert property (@(posedge clk) disable iff (!rst_n) wl_valid |-> !busy);

endmodule
