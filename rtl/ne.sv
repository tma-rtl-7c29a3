// ne: neural element, nine SAMs, one MOA18 and a PSI accumulator.
//
// The SAMs form three rows of three. Row i receives +-X of one input row
// at its left end (x_in[i], negx_in[i]); on every sh_en the values move one
// SAM to the right and the value leaving the rightmost SAM is presented on
// x_out[i], negx_out[i] for the next NE. After t shifts, SAM (i, p), p = 0
// leftmost, holds the sample that entered row i p shifts before the latest,
// so the leftmost column holds the newest input column and the weight
// written at (i, p) multiplies it. The 18 PSIs of the current pass are
// summed by the MOA18 (NUM_P is the count of PSIs with their sign bit set)
// and accumulated by psi_acc over one (INT5) or two (INT8) passes.
// Weights are written all nine at once with w_load. Timing: an input shift
// in cycle t is evaluated in t+1 (and t+2 for INT8, with sel_k = 1); o is
// valid the cycle after the last pass. The 3x3 arrangement and horizontal
// movement follow the source; the load port is this design's choice.
module ne
  import tma_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sh_en,
  input  logic                    sel_k,
  input  logic                    eval_en,
  input  logic [X_W-1:0]          x_in     [3],
  input  logic [X_W-1:0]          negx_in  [3],
  output logic [X_W-1:0]          x_out    [3],
  output logic [X_W-1:0]          negx_out [3],
  input  logic                    w_load,
  input  dec_w_t                  w_in     [3][3],
  output logic signed [NEO_W-1:0] o
);

  logic [X_W-1:0]          xq  [3][3];
  logic [X_W-1:0]          nxq [3][3];
  logic signed [PSI_W-1:0] psi [18];
  logic [4:0]              num_p;
  logic signed [MOA18_W-1:0] moa;

  for (genvar i = 0; i < 3; i++) begin : g_row
    for (genvar p = 0; p < 3; p++) begin : g_pos
      logic [X_W-1:0] xi, nxi;
      if (p == 0) begin : g_edge
        assign xi  = x_in[i];
        assign nxi = negx_in[i];
      end else begin : g_chain
        assign xi  = xq[i][p-1];
        assign nxi = nxq[i][p-1];
      end
      sam u_sam (
        .clk    (clk),
        .rst_n  (rst_n),
        .sh_en  (sh_en),
        .x_in   (xi),
        .negx_in(nxi),
        .w_load (w_load),
        .w_in   (w_in[i][p]),
        .sel_k  (sel_k),
        .x_q    (xq[i][p]),
        .negx_q (nxq[i][p]),
        .psi1   (psi[2*(3*i+p)]),
        .psi2   (psi[2*(3*i+p)+1])
      );
    end
    assign x_out[i]    = xq[i][2];
    assign negx_out[i] = nxq[i][2];
  end

  always_comb begin
    num_p = '0;
    for (int k = 0; k < 18; k++) num_p = num_p + 5'(psi[k][PSI_W-1]);
  end

  moa18 u_moa (
    .psi  (psi),
    .num_p(num_p),
    .o    (moa)
  );

  psi_acc u_acc (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (eval_en),
    .sel_k(sel_k),
    .moa  (moa),
    .o    (o)
  );

endmodule
