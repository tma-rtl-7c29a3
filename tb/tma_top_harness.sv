// tma_top_harness: end-to-end test of the accelerator core.
//
// Runs the core through the configurations the architecture supports and
// checks every result against a reference computed here from the input
// images and raw weights, independently of the core's FIFOs, feedback
// wiring and adders:
//   conv 3x3 INT5 (four filters, with activation/pooling checked),
//   conv 3x3 INT8 with vertical stride 2 and random stalls,
//   conv 6x6 INT5 (two filters, Psum6x6), conv 12x12 INT8 (one filter,
//   Psum12x12), and an FC pass (all lanes from SRAM, one result per 12
//   shifts).
// Lane streams: a lane that belongs to group g of G lanes (G = 3, 6, 12 by
// mode) carries, stripe after stripe, input row k*stride + (lane mod G) of
// the channels of that group, W pixels followed by 12 zeros (the depth of
// the SAM pipeline). Only the first W pixels of every lane are loaded up
// front; afterwards only the lanes marked SRAM receive data and all others
// must get theirs from the feedback path. After input shift t the SAM at
// position p of NE column c holds stream element t-1-3c-p, which is what the
// reference uses.
// FULL = 1 instantiates the core with its default parameters.
module tma_top_harness
  import tma_pkg::*;
#(
  parameter int N_CH       = 16,
  parameter int FIFO_DEPTH = 224,
  parameter int W          = 224,   // input row width used by the test
  parameter int NSTRIPE    = 2,     // horizontal sweeps per conv test
  parameter bit FULL       = 1'b1,
  parameter bit ALL_TESTS  = 1'b1,
  parameter int WATCHDOG   = 200000
) ();

  localparam int P     = W + 3 * NE_COLS;
  localparam int IDX_W = 16;
  localparam int CHW   = $clog2(N_CH + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  arr_mode_t             cfg_mode;
  logic                  cfg_int8, cfg_fc, clear;
  logic [LANES-1:0]      cfg_lane_sram;
  logic [1:0]            cfg_stride_vert;
  logic [4:0]            cfg_act_shift;
  logic [2:0]            cfg_pool_len;
  logic                  wl_valid;
  logic [3:0]            wl_ne;
  logic [CHW-1:0]        wl_ch;
  logic signed [7:0]     wl_w [3][3];
  logic [LANES-1:0]      x_push;
  logic [X_W-1:0]        x_data [LANES][N_CH];
  logic                  step, ready;
  logic                  psum_req;
  logic [IDX_W-1:0]      psum_req_idx;
  logic signed [PSUM_W-1:0] psum_in [4], bias_in [4];
  logic                  out_valid;
  logic [IDX_W-1:0]      out_idx;
  logic [2:0]            out_n;
  logic signed [PSUM_W-1:0] psum_out [4];
  logic                  act_valid;
  logic [X_W-1:0]        act_out [4];
  logic                  fifo_empty_any;

  if (FULL) begin : g_full
    tma_top u_dut (.*);
  end else begin : g_small
    tma_top #(.N_CH(N_CH), .FIFO_DEPTH(FIFO_DEPTH), .IDX_W(IDX_W)) u_dut (.*);
  end

  int checks = 0, failures = 0;
  // mechanism counters
  int n_int5_approx = 0, n_int8_pass2 = 0, n_fb_shift = 0, n_stride2 = 0;
  int n_mode3 = 0, n_mode6 = 0, n_mode12 = 0, n_fc = 0, n_stall = 0;
  int n_act = 0, n_psum_bias = 0;

  // test state used by the reference
  int cur_g, cur_s, cur_seed;
  bit cur_fc;
  int weff [NE_ROWS][NE_COLS][N_CH][3][3];
  int pb_psum [int][4];
  int pb_bias [int][4];
  int act_q [$];

  function automatic int hv(int a, int b, int c, int d, int e);
    int unsigned x;
    x = a * 32'd73856093 ^ b * 32'd19349663 ^ c * 32'd83492791
      ^ d * 32'd2654435761 ^ e * 32'd40503;
    x = x ^ (x >> 13);
    x = x * 32'd1274126177;
    x = x ^ (x >> 16);
    return int'(x % 255) - 127;
  endfunction

  // element idx of the stream of lane l, channel ch
  function automatic int sv(int l, int ch, int idx);
    int k, x;
    if (idx < 0) return 0;
    if (cur_fc) return hv(cur_seed, l, ch, idx, 7);
    k = idx / P;
    x = idx % P;
    if (x >= W) return 0;
    return hv(cur_seed, l / cur_g, ch, k * cur_s + (l % cur_g), x);
  endfunction

  function automatic int ref_col(int c, int t);
    int acc = 0;
    for (int r = 0; r < NE_ROWS; r++)
      for (int ch = 0; ch < N_CH; ch++)
        for (int i = 0; i < 3; i++)
          for (int p = 0; p < 3; p++)
            acc += weff[r][c][ch][i][p] * sv(3*r + i, ch, t - 1 - 3*c - p);
    return acc;
  endfunction

  function automatic int eff_int5(int w);
    if (w == 11 || w == 13) return 12;
    if (w == -11 || w == -13) return -12;
    return w;
  endfunction

  task automatic do_reset();
    rst_n = 1'b0;
    step = 0; x_push = '0; wl_valid = 0; clear = 0;
    psum_in = '{default: '0}; bias_in = '{default: '0};
    for (int l = 0; l < LANES; l++) for (int ch = 0; ch < N_CH; ch++) x_data[l][ch] = '0;
    for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++) wl_w[i][p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
  endtask

  task automatic load_weights(bit int8);
    for (int r = 0; r < NE_ROWS; r++)
      for (int c = 0; c < NE_COLS; c++)
        for (int ch = 0; ch < N_CH; ch++) begin
          wl_valid = 1'b1;
          wl_ne = 4'(NE_COLS * r + c);
          wl_ch = CHW'(ch);
          for (int i = 0; i < 3; i++)
            for (int p = 0; p < 3; p++) begin
              int w;
              if (int8) w = int'($urandom_range(255)) - 128;
              else begin
                w = int'($urandom_range(31)) - 16;
                if ($urandom_range(7) == 0) w = ($urandom_range(1) != 0) ? 11 : -13;
              end
              wl_w[i][p] = 8'(w);
              weff[r][c][ch][i][p] = int8 ? w : eff_int5(w);
              if (!int8 && weff[r][c][ch][i][p] != w) n_int5_approx++;
            end
          @(negedge clk);
        end
    wl_valid = 1'b0;
  endtask

  task automatic run_case(arr_mode_t mode, bit int8, bit fc, int stride, int nshift,
                          bit stalls, int seed);
    int t, g, ncap;
    logic [LANES-1:0] lsram;
    do_reset();
    cur_fc = fc; cur_s = stride; cur_seed = seed;
    g = (mode == MODE_3X3) ? 3 : (mode == MODE_6X6) ? 6 : 12;
    cur_g = g;
    for (int l = 0; l < LANES; l++) lsram[l] = fc || ((l % g) >= g - stride);
    cfg_mode = mode; cfg_int8 = int8; cfg_fc = fc;
    cfg_stride_vert = 2'(stride - 1);
    cfg_act_shift = 5'd10; cfg_pool_len = 3'd2;
    pb_psum.delete(); pb_bias.delete(); act_q.delete();
    load_weights(int8);
    // preload the first W elements of every lane from the SRAM side
    cfg_lane_sram = '1;
    for (int e = 0; e < W; e++) begin
      x_push = '1;
      for (int l = 0; l < LANES; l++)
        for (int ch = 0; ch < N_CH; ch++) x_data[l][ch] = 8'(sv(l, ch, e));
      @(negedge clk);
    end
    x_push = '0;
    cfg_lane_sram = lsram;
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    t = 0; ncap = 0;
    fork
      begin : drive
        while (t < nshift) begin
          bit go;
          go = !stalls || ($urandom_range(3) != 0);
          if (!go) n_stall++;
          if (go && ready) begin
            step = 1'b1;
            t++;
            x_push = lsram;
            for (int l = 0; l < LANES; l++)
              for (int ch = 0; ch < N_CH; ch++) x_data[l][ch] = 8'(sv(l, ch, W + t - 1));
            if (!fc && lsram != '1) n_fb_shift++;
            if (stride > 1) n_stride2++;
          end else begin
            step = 1'b0;
            x_push = '0;
            if (int8 && !ready) n_int8_pass2++;
          end
          @(negedge clk);
        end
        step = 1'b0; x_push = '0;
        repeat (8) @(negedge clk);
      end
      begin : respond
        forever begin
          if (psum_req) begin
            int k;
            k = int'(psum_req_idx);
            for (int c = 0; c < 4; c++) begin
              pb_psum[k][c] = int'($urandom_range(2000)) - 1000;
              pb_bias[k][c] = int'($urandom_range(200)) - 100;
              psum_in[c] = pb_psum[k][c];
              bias_in[c] = pb_bias[k][c];
            end
            n_psum_bias++;
          end
          @(negedge clk);
        end
      end
      begin : check
        forever begin
          if (out_valid) begin
            int k;
            int col [4];
            int expv [4];
            int en;
            k = int'(out_idx);
            ncap++;
            for (int c = 0; c < 4; c++) col[c] = ref_col(c, k);
            case (mode)
              MODE_3X3: begin
                en = 4;
                for (int c = 0; c < 4; c++) expv[c] = col[c] + pb_psum[k][c] + pb_bias[k][c];
                n_mode3++;
              end
              MODE_6X6: begin
                en = 2;
                expv[0] = col[0] + col[1] + pb_psum[k][0] + pb_bias[k][0];
                expv[1] = col[2] + col[3] + pb_psum[k][2] + pb_bias[k][2];
                n_mode6++;
              end
              default: begin
                en = 1;
                expv[0] = col[0] + col[1] + col[2] + col[3] + pb_psum[k][0] + pb_bias[k][0];
                if (fc) n_fc++; else n_mode12++;
              end
            endcase
            checks++;
            if (int'(out_n) != en) begin
              failures++;
              $display("FAIL out_n=%0d exp %0d", out_n, en);
            end
            if (fc) begin
              checks++;
              if (k % 12 != 0) begin
                failures++;
                $display("FAIL FC result at shift %0d", k);
              end
            end
            for (int c = 0; c < en; c++) begin
              checks++;
              if (psum_out[c] != expv[c]) begin
                failures++;
                if (failures < 20)
                  $display("FAIL mode %0d shift %0d out %0d: got %0d exp %0d",
                           mode, k, c, psum_out[c], expv[c]);
              end
            end
            // activation: ReLU, >>10, saturate 127; pooled pairs
            for (int c = 0; c < 4; c++) begin
              int a;
              a = (c < en) ? expv[c] : 0;
              a = (a < 0) ? 0 : ((a >>> 10) > 127 ? 127 : (a >>> 10));
              act_q.push_back(a);
            end
          end
          if (act_valid) begin
            n_act++;
            for (int c = 0; c < 4; c++) begin
              int a0, a1;
              a0 = act_q[c];
              a1 = act_q[4 + c];
              checks++;
              if (int'(act_out[c]) != ((a0 > a1) ? a0 : a1)) begin
                failures++;
                $display("FAIL act %0d got %0d exp %0d", c, act_out[c], (a0 > a1) ? a0 : a1);
              end
            end
            repeat (8) void'(act_q.pop_front());
          end
          @(negedge clk);
        end
      end
    join_any
    disable fork;
    $display("case mode=%0d int8=%0d fc=%0d results=%0d psum_req=%0d", mode, int8, fc, ncap, n_psum_bias);
    checks++;
    if (ncap != (fc ? nshift / 12 : nshift)) begin
      failures++;
      $display("FAIL mode %0d: %0d results for %0d shifts", mode, ncap, nshift);
    end
  endtask

  // throughput: INT5 one shift per cycle, INT8 one per two cycles
  task automatic rate_check(bit int8);
    int cyc, n;
    do_reset();
    cur_fc = 1'b1; cur_seed = 99; cur_g = 12; cur_s = 1;
    cfg_mode = MODE_12X12; cfg_int8 = int8; cfg_fc = 1'b0; cfg_lane_sram = '1;
    cfg_stride_vert = 2'd0; cfg_act_shift = 5'd0; cfg_pool_len = 3'd1;
    for (int e = 0; e < 4; e++) begin
      x_push = '1; @(negedge clk);
    end
    x_push = '0;
    n = 0; cyc = 0;
    while (n < 4) begin
      step = 1'b1; x_push = '1;
      if (ready) n++;
      cyc++;
      @(negedge clk);
    end
    step = 1'b0; x_push = '0;
    checks++;
    if (cyc != (int8 ? 7 : 4)) begin
      failures++;
      $display("FAIL rate int8=%0d: %0d cycles for 4 shifts", int8, cyc);
    end
    repeat (4) @(negedge clk);
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_mode = MODE_3X3; cfg_int8 = 0; cfg_fc = 0; cfg_lane_sram = '1;
    cfg_stride_vert = 0; cfg_act_shift = 0; cfg_pool_len = 1;
    wl_ne = 0; wl_ch = 0;
    run_case(MODE_3X3, 1'b0, 1'b0, 1, NSTRIPE * P, 1'b0, 11);
    if (ALL_TESTS) begin
      run_case(MODE_3X3,   1'b1, 1'b0, 2, NSTRIPE * P, 1'b1, 12);
      run_case(MODE_6X6,   1'b0, 1'b0, 1, NSTRIPE * P, 1'b0, 13);
      run_case(MODE_12X12, 1'b1, 1'b0, 1, NSTRIPE * P, 1'b0, 14);
      run_case(MODE_12X12, 1'b0, 1'b1, 1, 36, 1'b1, 15);
      rate_check(1'b0);
      rate_check(1'b1);
    end
    $display("mechanisms: int5_approx=%0d int8_pass2=%0d fb_shift=%0d stride2=%0d mode3=%0d mode6=%0d mode12=%0d fc=%0d stall=%0d psum_bias=%0d act=%0d",
             n_int5_approx, n_int8_pass2, n_fb_shift, n_stride2, n_mode3, n_mode6,
             n_mode12, n_fc, n_stall, n_psum_bias, n_act);
    checks++; if (n_int5_approx == 0) begin failures++; $display("FAIL no INT5 approximation"); end
    checks++; if (n_fb_shift == 0)    begin failures++; $display("FAIL no feedback reuse"); end
    checks++; if (n_mode3 == 0)       begin failures++; $display("FAIL no 3x3 result"); end
    checks++; if (n_psum_bias == 0)   begin failures++; $display("FAIL no Psum/Bias read"); end
    checks++; if (n_act == 0)         begin failures++; $display("FAIL no activation output"); end
    if (ALL_TESTS) begin
      checks++; if (n_int8_pass2 == 0) begin failures++; $display("FAIL no INT8 second pass"); end
      checks++; if (n_stride2 == 0)    begin failures++; $display("FAIL no vertical stride"); end
      checks++; if (n_mode6 == 0)      begin failures++; $display("FAIL no 6x6 result"); end
      checks++; if (n_mode12 == 0)     begin failures++; $display("FAIL no 12x12 result"); end
      checks++; if (n_fc == 0)         begin failures++; $display("FAIL no FC result"); end
      checks++; if (n_stall == 0)      begin failures++; $display("FAIL no stall"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
