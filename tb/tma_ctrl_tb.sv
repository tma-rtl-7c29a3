// tma_ctrl_tb: cycle timing of the shift sequencer.
// With step held high: INT5 gives one shift per cycle and cap two cycles
// after each shift; INT8 gives one shift per two cycles, passes with
// sel_k = 0 then 1, and cap three cycles after the shift; FC mode raises cap
// only for shifts 12, 24, ... Random step gaps are included.
module tma_ctrl_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear, int8, fc, step, ready, sh_en, eval_en, sel_k, cap, busy;
  logic [15:0] cap_idx;
  int checks = 0, failures = 0;

  tma_ctrl #(.IDX_W(16)) u_dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; int8 = 0; fc = 0; step = 0;
    for (int cfg = 0; cfg < 4; cfg++) begin
      int cyc, nsh, ncap;
      int shcyc [int];
      int capexp [$];
      int capidx [$];
      int8 = cfg[0]; fc = cfg[1];
      rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
      clear = 1; @(negedge clk); clear = 0;
      nsh = 0; ncap = 0;
      for (cyc = 0; cyc < 300; cyc++) begin
        step = (cyc < 250) && ((cfg < 2) || ($urandom_range(3) != 0));
        #1;
        // checks in this cycle
        if (sh_en) begin
          nsh++;
          shcyc[nsh] = cyc;
          if (!fc || nsh % 12 == 0) begin
            capexp.push_back(cyc + (int8 ? 3 : 2));
            capidx.push_back(nsh);
          end
          if (cyc > 0 && int8 && shcyc.exists(nsh - 1)) begin
            checks++;
            if (cyc - shcyc[nsh-1] < 2) begin failures++; $display("FAIL INT8 shifts too close"); end
          end
        end
        if (eval_en) begin
          int last, prev, e;
          last = shcyc.exists(nsh) ? shcyc[nsh] : -10;
          prev = shcyc.exists(nsh - 1) ? shcyc[nsh-1] : -10;
          // pass 0 one cycle after a shift, pass 1 two cycles after (INT8)
          if (sh_en) last = prev;
          e = (cyc == last + 1) ? 0 : 1;
          checks++;
          if (int'(sel_k) != e || (!int8 && e == 1)) begin
            failures++; $display("FAIL sel_k=%0d cycle %0d int8=%0d", sel_k, cyc, int8);
          end
        end
        if (cap) begin
          ncap++;
          checks++;
          if (capexp.size() == 0 || capexp[0] != cyc || int'(cap_idx) != capidx[0]) begin
            failures++;
            $display("FAIL cap at %0d idx %0d, expected %0d idx %0d", cyc, cap_idx,
                     capexp.size() ? capexp[0] : -1, capidx.size() ? capidx[0] : -1);
          end
          if (capexp.size()) begin void'(capexp.pop_front()); void'(capidx.pop_front()); end
        end
        @(negedge clk);
      end
      step = 0;
      checks++;
      if (capexp.size() != 0 || ncap == 0) begin failures++; $display("FAIL missing caps cfg %0d", cfg); end
      if (cfg == 0) begin
        checks++;
        if (nsh != 250) begin failures++; $display("FAIL INT5 rate %0d shifts in 250 cycles", nsh); end
      end
      if (cfg == 1) begin
        checks++;
        if (nsh != 125) begin failures++; $display("FAIL INT8 rate %0d shifts in 250 cycles", nsh); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
