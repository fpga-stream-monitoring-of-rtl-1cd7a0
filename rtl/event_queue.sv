// event_queue: the FIFO between the high-level and the low-level controller.
//
// The HLC can produce entries faster than the LLC evaluates them; the queue
// absorbs bursts and lets both sides run at their own pace. It is a circular
// buffer of DEPTH entries of W bits with first-word-fall-through output: dout
// always shows the oldest entry while empty is low, and `pop` removes it at
// the clock edge. A push into a full queue is dropped (the paper accepts data
// loss under sustained overload) and counted in `drops`. A push and a pop in
// the same cycle are both served.
// The paper names the queue and its signals (push, q_in, pop, empty, q_out)
// but gives neither depth nor structure; DEPTH = 8 is this design's choice.
module event_queue #(
  parameter int unsigned W     = 177,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic         empty,
  output logic         full,
  output logic [W-1:0] dout,
  output logic [15:0]  drops
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      drops  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && !do_push && drops != '1) drops <= drops + 1'b1;
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("event_queue: pop while empty");
endmodule
