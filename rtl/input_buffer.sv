// input_buffer: offline-mode buffer of DEPTH events in front of the
// scheduler and the event delay.
//
// Entry 0 is the oldest event (the head), presented to the scheduler and the
// event delay. On each hclk tick the buffer applies the paper's four cases:
//   hold=0, no new event : shift out the head
//   hold=1, no new event : keep
//   hold=1, new event    : append the new event at the first free entry
//   hold=0, new event    : shift out the head, then append
// While hold is set the head is the event whose time stamp made deadlines
// due; it leaves only once they are all emitted. An append with no free entry
// is an overflow: the event is dropped and the sticky `overflow` flag is set.
// The paper proves that DEPTH >= max backlog (deadlines made due per event
// against the event spacing) never overflows; it gives no number, so DEPTH = 4
// is this design's default.
module input_buffer #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned W     = 169
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         hclk_en,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  input  logic         hold,
  output logic         head_valid,
  output logic [W-1:0] head_data,
  output logic         overflow
);
  logic [W-1:0]     mem   [DEPTH];
  logic [DEPTH-1:0] used;            // used[k]: entry k holds an event

  logic [W-1:0]     nmem  [DEPTH];
  logic [DEPTH-1:0] nused;
  logic             drop, placed;

  always_comb begin
    // optional shift
    for (int k = 0; k < DEPTH; k++) begin
      if (!hold) begin
        nmem[k]  = (k + 1 < DEPTH) ? mem[k+1]  : '0;
        nused[k] = (k + 1 < DEPTH) ? used[k+1] : 1'b0;
      end else begin
        nmem[k]  = mem[k];
        nused[k] = used[k];
      end
    end
    // optional append at the first free entry
    drop   = in_valid && (nused == '1);
    placed = !in_valid;
    for (int k = 0; k < DEPTH; k++) begin
      if (!placed && !nused[k]) begin
        nmem[k]  = in_data;
        nused[k] = 1'b1;
        placed   = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used     <= '0;
      overflow <= 1'b0;
      for (int k = 0; k < DEPTH; k++) mem[k] <= '0;
    end else if (hclk_en) begin
      used <= nused;
      for (int k = 0; k < DEPTH; k++) mem[k] <= nmem[k];
      if (drop) overflow <= 1'b1;
    end
  end

  assign head_valid = used[0];
  assign head_data  = mem[0];

  // Entries are filled from the head without gaps.
  a_no_gap: assert property (@(posedge clk) disable iff (!rst_n)
                             ((used + 1'b1) & used) == '0);
endmodule
