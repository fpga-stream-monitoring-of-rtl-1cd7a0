// hlq_interface: turns events and deadlines into queue entries.
//
// A queue entry is {event, time stamp, affected-output mask}. The queue takes
// one entry per cycle, but an event and a deadline can be ready in the same
// hclk period, so this block runs on a tick twice as fast as hclk (qclk_en):
// on the even tick (q_odd = 0) it pushes the event if one is valid, on the odd
// tick (q_odd = 1) the deadline. Events therefore take precedence, which
// keeps time order in offline mode, where the event has been delayed by one
// hclk period behind the deadlines. With DL_FIRST set (used in online mode,
// where events are not delayed) the two ticks swap: a deadline found due at
// the same hclk tick that delivered an event is older than that event and
// goes first. DL_FIRST is this design's addition; the paper orders events
// first in both modes while stating that the order exists to keep events and
// deadlines in time order.
//   event entry   : {ev, ts, OR_i (DEP[i] & {N_OUT{ev[IN_VALID_POS[i]]}})}
//                   every output that depends on an input present in the
//                   event is marked for evaluation;
//   deadline entry: {0, dl_ts, OR_k (DL_TARGET[k] & {N_OUT{did[k]}})}
//                   the periodic streams of the deadline.
// The entry and push are registered: push is high for one sclk cycle per
// entry, one cycle after the tick. All of this follows the paper apart from
// that output register.
module hlq_interface #(
  parameter int unsigned EV_W   = 105,
  parameter int unsigned TS_W   = 64,
  parameter int unsigned N_IN   = 6,
  parameter int unsigned N_OUT  = 8,
  parameter int unsigned NUM_DL = 1,
  parameter int unsigned     IN_VALID_POS [N_IN]   = '{default: 0},
  parameter logic [N_OUT-1:0] DEP         [N_IN]   = '{default: '0},
  parameter logic [N_OUT-1:0] DL_TARGET   [NUM_DL] = '{default: '0},
  parameter bit          DL_FIRST = 1'b0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      qclk_en,
  input  logic                      q_odd,
  input  logic [TS_W-1:0]           tev_ts,
  input  logic [EV_W-1:0]           tev_ev,
  input  logic                      valid_tev,
  input  logic [TS_W-1:0]           dl_ts,
  input  logic [NUM_DL-1:0]         dl_did,
  input  logic                      dl_valid,
  output logic                      push,
  output logic [EV_W+TS_W+N_OUT-1:0] data
);
  logic [N_OUT-1:0] ev_aff, dl_aff;

  always_comb begin
    ev_aff = '0;
    for (int i = 0; i < N_IN; i++)
      ev_aff |= DEP[i] & {N_OUT{tev_ev[IN_VALID_POS[i]]}};
    dl_aff = '0;
    for (int k = 0; k < NUM_DL; k++)
      dl_aff |= DL_TARGET[k] & {N_OUT{dl_did[NUM_DL-1-k]}};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      push <= 1'b0;
      data <= '0;
    end else begin
      push <= 1'b0;
      if (qclk_en && (q_odd == DL_FIRST) && valid_tev) begin
        push <= 1'b1;
        data <= {tev_ev, tev_ts, ev_aff};
      end else if (qclk_en && (q_odd != DL_FIRST) && dl_valid) begin
        push <= 1'b1;
        data <= {{EV_W{1'b0}}, dl_ts, dl_aff};
      end
    end
  end
endmodule
