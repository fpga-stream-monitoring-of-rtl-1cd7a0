// out_stream: storage of one output stream.
//
// Holds the DEPTH most recent values, each with a valid bit; entry DEPTH-1 is
// the newest. Two steps per evaluation in which the stream is affected:
//   pe   (pseudo-extension, phase 1): every entry moves one place towards
//        entry 0 and the newest becomes the pseudo value '#' (value 0,
//        invalid). Lookups with offsets therefore address the same entries
//        whether or not the stream has been computed yet in this evaluation.
//   eval (its layer in phase 2): `value`, the result of the stream's
//        expression computed outside this module from the dependencies
//        (dep_in) and window results (w_in) of the paper's figure, is written
//        into the newest entry, valid.
// done = pe | eval: both take one cycle. d_out[n] = {value, valid}.
// Follows the paper's output-stream equations; keeping the expression logic
// outside the register module is this design's choice.
module out_stream #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   pe,
  input  logic                   eval,
  input  logic [W-1:0]           value,
  output logic                   done,
  output logic [DEPTH-1:0][W:0]  d_out
);
  logic [DEPTH-1:0][W:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r <= '0;
    else if (pe) begin
      for (int n = 0; n < DEPTH - 1; n++) r[n] <= r[n+1];
      r[DEPTH-1] <= '0;
    end else if (eval) begin
      r[DEPTH-1] <= {value, 1'b1};
    end
  end

  assign done  = pe | eval;
  assign d_out = r;

  a_no_pe_and_eval: assert property (@(posedge clk) disable iff (!rst_n) !(pe && eval));
endmodule
