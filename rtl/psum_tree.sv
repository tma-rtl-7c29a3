// psum_tree: the three binary adders above the NE array.
//
// From the four column sums Psum3x3_1..4 it forms Psum6x6_1 = 3x3_1 + 3x3_2,
// Psum6x6_2 = 3x3_3 + 3x3_4 and Psum12x12 = 6x6_1 + 6x6_2, and presents,
// depending on the mode, four results (3x3 filters), two (filters up to
// 6x6) or one (filters up to 12x12 and FC layers) on psum[0..n_out-1].
// Unused outputs are zero. Combinational.
module psum_tree
  import tma_pkg::*;
(
  input  arr_mode_t                mode,
  input  logic signed [PSUM_W-1:0] p3 [4],
  output logic signed [PSUM_W-1:0] psum [4],
  output logic [2:0]               n_out
);
  logic signed [PSUM_W-1:0] p6_1, p6_2, p12;

  assign p6_1 = p3[0] + p3[1];
  assign p6_2 = p3[2] + p3[3];
  assign p12  = p6_1 + p6_2;

  always_comb begin
    psum = '{default: '0};
    case (mode)
      MODE_6X6: begin
        psum[0] = p6_1;
        psum[1] = p6_2;
        n_out   = 3'd2;
      end
      MODE_12X12: begin
        psum[0] = p12;
        n_out   = 3'd1;
      end
      default: begin
        psum    = p3;
        n_out   = 3'd4;
      end
    endcase
  end
endmodule
