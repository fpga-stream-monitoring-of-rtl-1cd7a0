// eval_controller: sequences one evaluation of the stream components.
//
// The state machine has the paper's l+2 states: idle, 1 (pseudo-extension)
// and 2.1 .. 2.l, one per layer of the evaluation order (N_LAYERS = l). It is
// encoded as a phase (IDLE, PH1, PH2) plus a layer number.
//   idle -> 1     when een is set.
//   state 1       first cycle: `start1` pulses: input streams take their new
//                 values, affected output streams are pseudo-extended. Every
//                 cycle, the first included: `evict` is high so windows drop outdated buckets.
//                 Leaves when done1 (all windows are up to date).
//   state 2.x     two steps. Step 0 pulses layer_req[x]: windows whose target
//                 stream was computed in layer x-1 add the new value, windows
//                 used in layer x compute their aggregate. Step 1 holds
//                 layer_eval[x] until done2: output streams of layer x compute
//                 and store their values. Then 2.(x+1), or idle after 2.l with
//                 a one-cycle `eval_done` pulse.
// The states and the done1/done2.x conditions follow the paper; splitting
// each 2.x state into a window step and an evaluation step is this design's
// choice. An evaluation takes 1 + (cycles in 1) + 2*l cycles when every
// expression needs one cycle.
module eval_controller #(
  parameter int unsigned N_LAYERS = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                een,
  input  logic                done1,
  input  logic                done2,
  output logic                start1,
  output logic                evict,
  output logic [N_LAYERS:1]   layer_req,
  output logic [N_LAYERS:1]   layer_eval,
  output logic                eval_done,
  output logic                busy
);
  typedef enum logic [1:0] {S_IDLE, S_PH1, S_PH2} phase_e;
  localparam int unsigned LW = $clog2(N_LAYERS + 1);

  phase_e        phase;
  logic          first;     // first cycle of state 1
  logic          step;      // 0: window step, 1: evaluation step
  logic [LW-1:0] layer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= S_IDLE;
      first <= 1'b0;
      step  <= 1'b0;
      layer <= '0;
    end else begin
      unique case (phase)
        S_IDLE: if (een) begin
          phase <= S_PH1;
          first <= 1'b1;
        end
        S_PH1: begin
          first <= 1'b0;
          if (done1) begin
            phase <= S_PH2;
            layer <= LW'(1);
            step  <= 1'b0;
          end
        end
        S_PH2: begin
          if (!step) step <= 1'b1;
          else if (done2) begin
            step <= 1'b0;
            if (layer == LW'(N_LAYERS)) begin
              phase <= S_IDLE;
              layer <= '0;
            end else begin
              layer <= layer + 1'b1;
            end
          end
        end
        default: phase <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    start1     = (phase == S_PH1) && first;
    evict      = (phase == S_PH1);
    layer_req  = '0;
    layer_eval = '0;
    for (int x = 1; x <= N_LAYERS; x++) begin
      layer_req[x]  = (phase == S_PH2) && !step && (layer == LW'(x));
      layer_eval[x] = (phase == S_PH2) &&  step && (layer == LW'(x));
    end
    eval_done = (phase == S_PH2) && step && done2 && (layer == LW'(N_LAYERS));
    busy      = (phase != S_IDLE);
  end
endmodule
