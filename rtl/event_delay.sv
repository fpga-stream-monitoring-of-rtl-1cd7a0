// event_delay: joins the internal time stamp with the event data.
//
// Online mode: the event passes without delay (valid_tev = valid_ev,
// tev_ev = ev); its time stamp is the value of its at the hclk tick that
// delivered the event, held in a register for the hclk period. That is the
// same sample the scheduler judges deadlines by, so an event never carries a
// time stamp later than a deadline that is only reported after it.
// Offline mode: the compound {valid, its, ev} goes through a register loaded
// on every hclk tick, giving the one-cycle delay that matches the scheduler's
// registered deadline output, so an event and the deadlines that precede it
// leave the HLC in time order. While `hold` is set the current event is not
// taken: it stays at the head of the input buffer until all deadlines it made
// due are emitted, and the register loads an empty slot instead.
//
// The paper passes its itself online; the per-tick sample is this design's
// choice (the difference is at most one hclk period). The paper describes
// the one-cycle `data` register and stalling during
// hold, and writes a second register `stalled` behind it. This design keeps
// the event at the input buffer's head during hold instead of in `stalled`:
// with a second stage an event could leave after deadlines that are younger
// than it. Each event is emitted exactly once, valid for one hclk period.
module event_delay
#(
  parameter rtlola_pkg::mode_e       MODE = rtlola_pkg::MODE_ONLINE,
  parameter int unsigned EV_W = 105,
  parameter int unsigned TS_W = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            hclk_en,
  input  logic [TS_W-1:0] its,
  input  logic [EV_W-1:0] ev,
  input  logic            valid_ev,
  input  logic            hold,
  output logic [TS_W-1:0] tev_ts,
  output logic [EV_W-1:0] tev_ev,
  output logic            valid_tev
);
  typedef struct packed {
    logic            valid;
    logic [TS_W-1:0] ts;
    logic [EV_W-1:0] ev;
  } slot_t;

  slot_t           data;
  logic [TS_W-1:0] its_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data  <= '0;
      its_q <= '0;
    end else if (hclk_en) begin
      data  <= hold ? '0 : slot_t'{valid_ev, its, ev};
      its_q <= its;
    end
  end

  always_comb begin
    if (MODE == rtlola_pkg::MODE_ONLINE) begin
      tev_ts    = its_q;
      tev_ev    = ev;
      valid_tev = valid_ev;
    end else begin
      tev_ts    = data.ts;
      tev_ev    = data.ev;
      valid_tev = data.valid;
    end
  end
endmodule
