// tma_pkg_tb: checks the shared definitions of the accelerator.
//
// term_val is compared, for every sign code and exponent, with a power of
// two built by repeated doubling; the sign code 10 (unused) must read as
// zero. The constants are checked against the relations the datapath relies
// on (a PSI holds an 8-bit input shifted by 7, twelve lanes for four NE
// rows, a 20-bit decomposed weight with s1_1 in its top bits) and the mode
// encoding against the values the array decodes. Runs in zero time; the
// watchdog only guards against a hang.
module tma_pkg_tb;
  import tma_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dec_w_t d;
    int p, e;
    for (int n = 0; n < 8; n++) begin
      p = 1;
      for (int i = 0; i < n; i++) p = p + p;
      check(term_val(S_POS, 3'(n)) == p, $sformatf("term_val(+,%0d)", n));
      check(term_val(S_NEG, 3'(n)) == -p, $sformatf("term_val(-,%0d)", n));
      check(term_val(S_ZERO, 3'(n)) == 0, $sformatf("term_val(0,%0d)", n));
      check(term_val(sgn_t'(2'b10), 3'(n)) == 0, $sformatf("term_val(10,%0d)", n));
    end
    check(S_ZERO == 2'b00 && S_POS == 2'b01 && S_NEG == 2'b11, "sign code");
    check(PSI_W == X_W + 7, "PSI width");
    check(MOA18_W == PSI_W + 4, "MOA18 width");
    check(NEO_W == MOA18_W + 1, "NE output width");
    check(LANES == 3 * NE_ROWS && LANES == 12, "lanes");
    check(NE_COLS == 4, "NE columns");
    check(PSUM_W >= NEO_W + 6, "Psum width holds 64 NE outputs");
    check($bits(dec_w_t) == 20, "decomposed weight width");
    d = '0;
    d.s1_1 = S_NEG;
    check(20'(d) == 20'hC0000, "s1_1 position");
    d = '0;
    d.n2_2 = 3'd5;
    check(20'(d) == 20'h00005, "n2_2 position");
    e = int'(MODE_3X3) * 100 + int'(MODE_6X6) * 10 + int'(MODE_12X12);
    check(e == 12, "mode encoding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
