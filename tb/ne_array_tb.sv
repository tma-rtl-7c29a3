// ne_array_tb: the NE array with its lanes at reduced depth (2 channels,
// 6-deep FIFOs, 6-pixel rows), driven directly with sh_en / eval_en.
// 3x3 mode with vertical stride 1 and 6x6 mode with vertical stride 2:
// only the first row of every lane is loaded, the rest must come through
// the feedback path. Every result is compared with a reference computed
// from the images and the weights' values (see tma_top_harness for the
// stream layout).
module ne_array_tb;
  import tma_pkg::*;
  localparam int N_CH = 2, D = 6, W = 6, P = W + 12;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  arr_mode_t mode;
  logic [LANES-1:0] lane_sram, sram_push;
  logic [1:0] stride_vert;
  logic [7:0] sram_x [LANES][N_CH];
  logic sh_en, sel_k, eval_en, w_load;
  logic [3:0] w_ne;
  logic [1:0] w_ch;
  dec_w_t w_in [3][3];
  logic signed [31:0] psum_in [4], bias_in [4], psum_out [4];
  logic [2:0] n_out;
  logic fifo_empty_any;
  int checks = 0, failures = 0;
  int wv [4][4][N_CH][3][3];
  int cg, cs;

  ne_array #(.N_CH(N_CH), .FIFO_DEPTH(D)) u_dut (.*);

  function automatic int hv(int a, int b, int c, int d);
    int unsigned x;
    x = a * 32'd73856093 ^ b * 32'd19349663 ^ c * 32'd83492791 ^ d * 32'd2654435761;
    x = x ^ (x >> 15);
    x = x * 32'd2246822519;
    x = x ^ (x >> 13);
    return int'(x % 255) - 127;
  endfunction

  function automatic int sv(int l, int ch, int idx);
    int k, x;
    if (idx < 0) return 0;
    k = idx / P; x = idx % P;
    if (x >= W) return 0;
    return hv(l / cg, ch, k * cs + (l % cg), x);
  endfunction

  function automatic sgn_t rs();
    case ($urandom_range(2))
      0: return S_ZERO;
      1: return S_POS;
      default: return S_NEG;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sh_en = 0; sel_k = 0; eval_en = 0; w_load = 0; w_ne = 0; w_ch = 0; sram_push = '0;
    stride_vert = 0; mode = MODE_3X3; lane_sram = '1;
    for (int c = 0; c < 4; c++) begin psum_in[c] = 0; bias_in[c] = 0; end
    for (int l = 0; l < LANES; l++) for (int ch = 0; ch < N_CH; ch++) sram_x[l][ch] = 0;
    for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++) w_in[i][p] = '0;
    for (int run = 0; run < 2; run++) begin
      logic [LANES-1:0] ls;
      rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
      mode = (run == 0) ? MODE_3X3 : MODE_6X6;
      cg = (run == 0) ? 3 : 6;
      cs = run + 1;
      stride_vert = 2'(cs - 1);
      for (int l = 0; l < LANES; l++) ls[l] = (l % cg) >= cg - cs;
      // weights
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) for (int ch = 0; ch < N_CH; ch++) begin
        for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++) begin
          w_in[i][p] = {rs(), 3'($urandom_range(4)), rs(), 3'($urandom_range(4)), S_ZERO, 3'd0, S_ZERO, 3'd0};
          wv[r][c][ch][i][p] = term_val(w_in[i][p].s1_1, w_in[i][p].n1_1) + term_val(w_in[i][p].s2_1, w_in[i][p].n2_1);
        end
        w_load = 1; w_ne = 4'(4 * r + c); w_ch = 2'(ch);
        @(negedge clk);
      end
      w_load = 0;
      // preload one row per lane
      lane_sram = '1;
      for (int e = 0; e < W; e++) begin
        sram_push = '1;
        for (int l = 0; l < LANES; l++) for (int ch = 0; ch < N_CH; ch++) sram_x[l][ch] = 8'(sv(l, ch, e));
        @(negedge clk);
      end
      sram_push = '0;
      lane_sram = ls;
      for (int t = 1; t <= 3 * P; t++) begin
        int col [4];
        int pb [4];
        int expv [4];
        int en;
        sh_en = 1;
        sram_push = ls;
        for (int l = 0; l < LANES; l++) for (int ch = 0; ch < N_CH; ch++) sram_x[l][ch] = 8'(sv(l, ch, W + t - 1));
        @(negedge clk);
        sh_en = 0; sram_push = '0; eval_en = 1;
        @(negedge clk);
        eval_en = 0;
        for (int c = 0; c < 4; c++) begin
          pb[c] = int'($urandom_range(1000)) - 500;
          psum_in[c] = pb[c];
          bias_in[c] = 7 * c;
          col[c] = 0;
          for (int r = 0; r < 4; r++) for (int ch = 0; ch < N_CH; ch++)
            for (int i = 0; i < 3; i++) for (int p = 0; p < 3; p++)
              col[c] += wv[r][c][ch][i][p] * sv(3 * r + i, ch, t - 1 - 3 * c - p);
        end
        #1;
        if (run == 0) begin
          en = 4;
          for (int c = 0; c < 4; c++) expv[c] = col[c] + pb[c] + 7 * c;
        end else begin
          en = 2;
          expv[0] = col[0] + col[1] + pb[0];
          expv[1] = col[2] + col[3] + pb[2] + 14;
        end
        checks++;
        if (int'(n_out) != en) begin failures++; $display("FAIL n_out"); end
        for (int c = 0; c < en; c++) begin
          checks++;
          if (psum_out[c] != expv[c]) begin
            failures++;
            if (failures < 10) $display("FAIL run %0d t %0d out %0d got %0d exp %0d", run, t, c, psum_out[c], expv[c]);
          end
        end
        checks++;
        if (fifo_empty_any) begin failures++; $display("FAIL a lane FIFO ran empty"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
