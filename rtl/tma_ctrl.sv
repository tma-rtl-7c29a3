// tma_ctrl: input-shift sequencer of the NE array.
//
// A request on step is accepted when ready is high and becomes one input
// shift (sh_en) in that cycle. The window created by the shift is evaluated
// in the next cycle (eval_en, sel_k = 0); with INT8 weights it is evaluated
// once more in the cycle after (sel_k = 1) and no new shift is accepted
// during the first pass, so INT8 runs at half the INT5 rate, one shift per
// two cycles, matching the source's 576 / 288 GMACS peak figures. One cycle
// after the last pass the NE outputs are stable and cap is raised: the top
// captures the column sums then, and Psum/Bias must be presented in that
// cycle. cap_idx is the 1-based number of the shift that produced it,
// counted since clear. In FC mode only every twelfth shift gives a result
// (2,304 new inputs fill the array per 12 shifts), so cap is raised only
// for shifts 12, 24, ... The counters and the exact cycle assignment are
// this design's choices.
module tma_ctrl #(
  parameter int IDX_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             int8,
  input  logic             fc,
  input  logic             step,
  output logic             ready,
  output logic             sh_en,
  output logic             eval_en,
  output logic             sel_k,
  output logic             cap,
  output logic [IDX_W-1:0] cap_idx,
  output logic             busy
);
  logic             ev0, ev1, done;
  logic [IDX_W-1:0] cnt, idx0, idx1, idx_done;
  logic [3:0]       fc_cnt, fc0, fc1, fc_done;

  assign ready   = !(int8 && ev0);
  assign sh_en   = step && ready;
  assign eval_en = ev0 || ev1;
  assign sel_k   = ev1;
  assign done    = int8 ? ev1 : ev0;
  assign idx_done = int8 ? idx1 : idx0;
  assign fc_done  = int8 ? fc1 : fc0;
  assign busy    = ev0 || ev1 || cap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev0 <= 1'b0; ev1 <= 1'b0; cap <= 1'b0;
      cnt <= '0; idx0 <= '0; idx1 <= '0; cap_idx <= '0;
      fc_cnt <= '0; fc0 <= '0; fc1 <= '0;
    end else begin
      ev0  <= sh_en;
      ev1  <= ev0 && int8;
      idx1 <= idx0;
      fc1  <= fc0;
      if (sh_en) begin
        cnt    <= cnt + IDX_W'(1);
        idx0   <= cnt + IDX_W'(1);
        fc_cnt <= (fc_cnt == 4'd11) ? 4'd0 : fc_cnt + 4'd1;
        fc0    <= fc_cnt;
      end
      cap     <= done && (!fc || fc_done == 4'd11);
      cap_idx <= idx_done;
      if (clear) begin
        cnt    <= '0;
        fc_cnt <= '0;
      end
    end
  end

  a_clear_idle: assert property (@(posedge clk) disable iff (!rst_n) clear |-> !step);

endmodule
