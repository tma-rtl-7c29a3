// lane_fifo: input FIFO of one array lane and one channel.
//
// A circular buffer of DEPTH bytes (224 by default, the widest input row it
// must hold) with a first-word-fall-through head: dout always shows the
// oldest entry, and pop (an input shift) removes it at the clock edge.
// push and pop may happen in the same cycle, also when the FIFO is full,
// which is how a lane recirculates a row. A word pushed in cycle t can be
// popped from cycle t+1 on. Pushing into a full FIFO without popping, or
// popping an empty one, is a protocol error (asserted, and ignored).
module lane_fifo #(
  parameter int DEPTH = 224,
  parameter int W     = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       empty,
  output logic                       full
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rd];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] a);
    return (a == AW'(DEPTH - 1)) ? '0 : a + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd    <= '0;
      wr    <= '0;
      count <= '0;
    end else begin
      if (do_push) wr <= inc(wr);
      if (do_pop)  rd <= inc(rd);
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
