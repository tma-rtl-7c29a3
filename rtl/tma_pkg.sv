// tma_pkg: types and constants shared by the multiplier-less accelerator.
//
// A weight w is held as up to four signed powers of two,
//   w = s1_1*2^n1_1 + s2_1*2^n2_1 + s1_2*2^n1_2 + s2_2*2^n2_2,
// each s in {-1,0,+1} on 2 bits and each n in 0..7 on 3 bits, the field
// widths printed in the SAM diagram of the source design. INT5 weights use
// only the k=1 pair (two partial sub-integers, PSIs); INT8 weights use both
// pairs (four PSIs). The 2-bit sign code below is this design's choice.
// Activations are signed 8-bit, a PSI is 15 bits (8-bit input shifted by up
// to 7), the 18-input multi-operand adder returns 19 bits. The Psum width
// (32 bits) is this design's choice.
package tma_pkg;

  localparam int X_W      = 8;   // activation width
  localparam int PSI_W    = 15;  // partial sub-integer width
  localparam int MOA18_W  = 19;  // MOA18 result O[18:0]
  localparam int NEO_W    = 20;  // NE output after PSI accumulation (2 passes)
  localparam int PSUM_W   = 32;  // Psum / Bias width
  localparam int NE_ROWS  = 4;   // NE rows of the array
  localparam int NE_COLS  = 4;   // NE columns of the array
  localparam int LANES    = 3 * NE_ROWS;  // 12 input rows (lanes)

  // sign code of one power-of-two term
  typedef enum logic [1:0] {
    S_ZERO = 2'b00,
    S_POS  = 2'b01,
    S_NEG  = 2'b11
  } sgn_t;

  typedef struct packed {
    sgn_t       s1_1;
    logic [2:0] n1_1;
    sgn_t       s2_1;
    logic [2:0] n2_1;
    sgn_t       s1_2;
    logic [2:0] n1_2;
    sgn_t       s2_2;
    logic [2:0] n2_2;
  } dec_w_t;

  // how the four Psum3x3 column results are combined (Fig. 5 / Fig. 7)
  typedef enum logic [1:0] {
    MODE_3X3   = 2'd0,  // four 3x3xD filters, four Psums per shift
    MODE_6X6   = 2'd1,  // two filters up to 6x6 (e.g. 5x5), two Psums
    MODE_12X12 = 2'd2   // one filter up to 12x12 (e.g. 11x11) or FC, one Psum
  } arr_mode_t;

  // value of one decoded term, for reference use
  function automatic int term_val(sgn_t s, logic [2:0] n);
    case (s)
      S_POS:   return  (1 << n);
      S_NEG:   return -(1 << n);
      default: return 0;
    endcase
  endfunction

endpackage
