// llq_interface: the low-level controller's side of the queue.
//
// A three-state machine:
//   IDLE - wait until the queue is not empty, then go to POP;
//   POP  - raise `pop` for one system cycle, copy the queue head into the
//          d_in register, set the evaluation-enable latch `een`, go to EVAL;
//   EVAL - wait until the evaluation controller reports completion
//          (eval_done), clear een, then go to POP if the queue still holds
//          entries, otherwise to IDLE.
// States, transitions and the een hand-shake follow the paper's state
// diagram. Copying the head into a local d_in register is this design's
// choice (the queue has first-word-fall-through output), so the entry stays
// stable for the whole evaluation.
module llq_interface #(
  parameter int unsigned W = 177
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         empty,
  input  logic [W-1:0] q_out,
  input  logic         eval_done,
  output logic         pop,
  output logic         een,
  output logic [W-1:0] d_in
);
  typedef enum logic [1:0] {S_IDLE, S_POP, S_EVAL} state_e;
  state_e state;

  assign pop = (state == S_POP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      een   <= 1'b0;
      d_in  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (!empty) state <= S_POP;
        S_POP: begin
          d_in  <= q_out;
          een   <= 1'b1;
          state <= S_EVAL;
        end
        S_EVAL: if (eval_done) begin
          een   <= 1'b0;
          state <= empty ? S_IDLE : S_POP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_een_in_eval: assert property (@(posedge clk) disable iff (!rst_n)
                                  een == (state == S_EVAL));
endmodule
