// in_stream: storage of one input stream.
//
// Holds the DEPTH most recent values of the stream, each with a valid bit.
// Entry DEPTH-1 is the newest (offset 0), entry DEPTH-2 the one before
// (offset -1), and so on; DEPTH is the greatest offset any expression looks
// up on this stream plus one. On `upd` (one cycle, in the pseudo-extension
// phase) all entries move one place towards entry 0, the oldest is dropped
// and d_in is written as the newest, valid. done = upd: the update takes a
// single cycle. After reset all entries are zero and invalid, so a lookup
// before the first value falls back to the expression's default.
// d_out[n] = {value, valid}: bit 0 is the valid bit.
// Follows the paper's input-stream equations; counting offset 0 in DEPTH is
// this design's reading of the paper's kappa.
module in_stream #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   upd,
  input  logic [W-1:0]           d_in,
  output logic                   done,
  output logic [DEPTH-1:0][W:0]  d_out
);
  logic [DEPTH-1:0][W:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r <= '0;
    else if (upd) begin
      for (int n = 0; n < DEPTH - 1; n++) r[n] <= r[n+1];
      r[DEPTH-1] <= {d_in, 1'b1};
    end
  end

  assign done  = upd;
  assign d_out = r;
endmodule
