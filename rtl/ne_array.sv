// ne_array: the 4x4 array of neural elements, N_CH deep, with its lanes.
//
// Twelve input lanes (three per NE row) run left to right through the four
// NE columns; every lane is N_CH channels wide, one NE per channel and
// array position, so the default array holds 4x4x16 NEs = 2,304 SAMs.
// Each lane and channel has a FIFO fed by a lane_src_mux: either SRAM data
// (sram_push/sram_x) or the value that lane N+s shifts out of the last NE
// column (feedback), for vertical stride s. On every sh_en all FIFOs pop
// one byte, GEN_NEG forms its negation, and the pair enters the leftmost
// SAMs, while the bytes leaving the rightmost SAMs are pushed into the
// feedback lanes. So a lane that is not SRAM-fed sees, after its own row,
// the row of the lane below it: the input rows are reused for the next
// sweep instead of being reloaded.
// Each NE column is summed by a MOA66 (all NE rows and channels plus a Psum
// and a Bias) into Psum3x3_c; psum_tree combines those by mode. In 6x6 mode
// only columns 1 and 3, in 12x12 mode only column 1, add psum_in/bias_in;
// the others add zero, so each result counts its Psum and Bias once.
// Weights are written per NE and channel: w_ne = 4*row + column.
// Outputs are combinational from the NE output registers.
module ne_array
  import tma_pkg::*;
#(
  parameter int N_CH       = 16,
  parameter int FIFO_DEPTH = 224
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  arr_mode_t                mode,
  input  logic [LANES-1:0]         lane_sram,   // 1: lane FIFO fed from SRAM
  input  logic [1:0]               stride_vert, // vertical stride minus one
  input  logic [LANES-1:0]         sram_push,
  input  logic [X_W-1:0]           sram_x [LANES][N_CH],
  input  logic                     sh_en,
  input  logic                     sel_k,
  input  logic                     eval_en,
  input  logic                     w_load,
  input  logic [3:0]               w_ne,
  input  logic [$clog2(N_CH+1)-1:0] w_ch,
  input  dec_w_t                   w_in [3][3],
  input  logic signed [PSUM_W-1:0] psum_in [4],
  input  logic signed [PSUM_W-1:0] bias_in [4],
  output logic signed [PSUM_W-1:0] psum_out [4],
  output logic [2:0]               n_out,
  output logic                     fifo_empty_any
);

  // lane signals
  logic [X_W-1:0] head   [LANES][N_CH];
  logic [X_W-1:0] head_n [LANES][N_CH];
  logic [X_W-1:0] lane_o [LANES][N_CH];   // shifted out of the last column
  logic [LANES*N_CH-1:0] emp;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    for (genvar ch = 0; ch < N_CH; ch++) begin : g_ch
      logic [X_W-1:0] fb [4];
      logic [X_W-1:0] fin;
      logic           push;
      for (genvar j = 0; j < 4; j++) begin : g_fb
        if (l + 1 + j < LANES) begin : g_src
          assign fb[j] = lane_o[l+1+j][ch];
        end else begin : g_none
          assign fb[j] = '0;
        end
      end
      lane_src_mux u_mux (
        .use_sram   (lane_sram[l]),
        .stride_vert(stride_vert),
        .sram_x     (sram_x[l][ch]),
        .fb         (fb),
        .y          (fin)
      );
      assign push = lane_sram[l] ? sram_push[l] : sh_en;
      lane_fifo #(.DEPTH(FIFO_DEPTH), .W(X_W)) u_fifo (
        .clk  (clk),
        .rst_n(rst_n),
        .push (push),
        .din  (fin),
        .pop  (sh_en),
        .dout (head[l][ch]),
        .count(),
        .empty(emp[l*N_CH+ch]),
        .full ()
      );
      gen_neg u_neg (
        .x    (head[l][ch]),
        .neg_x(head_n[l][ch])
      );
    end
  end
  assign fifo_empty_any = |emp;

  // NE grid
  logic [X_W-1:0]          nx   [NE_ROWS][NE_COLS][N_CH][3];
  logic [X_W-1:0]          nnx  [NE_ROWS][NE_COLS][N_CH][3];
  logic signed [NEO_W-1:0] col_o [NE_COLS][NE_ROWS*N_CH];

  for (genvar r = 0; r < NE_ROWS; r++) begin : g_r
    for (genvar c = 0; c < NE_COLS; c++) begin : g_c
      for (genvar ch = 0; ch < N_CH; ch++) begin : g_ch
        logic [X_W-1:0] xi [3];
        logic [X_W-1:0] nxi [3];
        logic           ld;
        for (genvar i = 0; i < 3; i++) begin : g_i
          if (c == 0) begin : g_first
            assign xi[i]  = head[3*r+i][ch];
            assign nxi[i] = head_n[3*r+i][ch];
          end else begin : g_next
            assign xi[i]  = nx[r][c-1][ch][i];
            assign nxi[i] = nnx[r][c-1][ch][i];
          end
          if (c == NE_COLS - 1) begin : g_last
            assign lane_o[3*r+i][ch] = nx[r][c][ch][i];
          end
        end
        assign ld = w_load && (w_ne == 4'(NE_COLS*r + c))
                    && (w_ch == ($clog2(N_CH+1))'(ch));
        ne u_ne (
          .clk     (clk),
          .rst_n   (rst_n),
          .sh_en   (sh_en),
          .sel_k   (sel_k),
          .eval_en (eval_en),
          .x_in    (xi),
          .negx_in (nxi),
          .x_out   (nx[r][c][ch]),
          .negx_out(nnx[r][c][ch]),
          .w_load  (ld),
          .w_in    (w_in),
          .o       (col_o[c][r*N_CH+ch])
        );
      end
    end
  end

  // column adders with mode-dependent Psum/Bias use
  logic signed [PSUM_W-1:0] p3 [4];
  logic [3:0] use_pb;
  always_comb begin
    case (mode)
      MODE_6X6:   use_pb = 4'b0101;
      MODE_12X12: use_pb = 4'b0001;
      default:    use_pb = 4'b1111;
    endcase
  end

  for (genvar c = 0; c < NE_COLS; c++) begin : g_col
    moa66 #(.NIN(NE_ROWS * N_CH)) u_moa66 (
      .ne_o(col_o[c]),
      .psum(use_pb[c] ? psum_in[c] : '0),
      .bias(use_pb[c] ? bias_in[c] : '0),
      .sum (p3[c])
    );
  end

  psum_tree u_tree (
    .mode (mode),
    .p3   (p3),
    .psum (psum_out),
    .n_out(n_out)
  );

endmodule
