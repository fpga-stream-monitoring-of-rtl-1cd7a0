// hlc: high-level controller of the monitor.
//
// Receives external events, keeps the periodic schedule and pushes one queue
// entry per event and per deadline, so that the low-level controller need
// not distinguish the two. Structure (events left to right, deadlines top to
// bottom):
//
//   ext_write/ext_din -> ext_interface --ev--------------------> event_delay --tev--+
//                              |ext_ts                                ^             |
//                              v                                      |hold         v
//                         time_select --its--> [input_buffer] --> scheduler --dl--> hlq_interface --> push, q_in
//
// The input buffer exists in offline mode only; in online mode events go
// straight on and the scheduler never raises hold. prescaler supplies the
// hclk tick (every PRESCALE system cycles) and the doubled queue-interface
// tick. The entry layout is rtlola_pkg::qentry_t.
//
// Latency (online, PRESCALE = 4): an event written by the source reaches the
// queue 1 to 2 hclk periods later. Offline, the buffer and the event delay add
// one hclk period each.
module hlc
  import rtlola_pkg::*;
#(
  parameter mode_e           MODE       = MODE_ONLINE,
  parameter longint unsigned CLK_PERIOD = CLK_PERIOD_NS,
  parameter int unsigned     PRESCALE   = 4,
  parameter int unsigned     BUF_DEPTH  = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ext_write,
  input  logic [TS_W+EV_W-1:0] ext_din,
  output logic                 ext_avail,
  output logic                 push,
  output logic [QE_W-1:0]      q_in,
  output logic                 hold,
  output logic                 buf_overflow
);
  logic hclk_en, qclk_en, q_odd;

  logic [EV_W-1:0] ev;
  logic            valid_ev;
  ts_t             ext_ts, its;
  logic            valid_ext_ts, valid_its;

  // signals seen by the scheduler and the event delay
  ts_t             s_its;
  logic [EV_W-1:0] s_ev;
  logic            s_valid;

  logic              dl_valid;
  logic [NUM_DL-1:0] dl_did;
  ts_t               dl_ts;

  ts_t             tev_ts;
  logic [EV_W-1:0] tev_ev;
  logic            valid_tev;

  prescaler #(.DIV(PRESCALE)) u_prescaler (
    .clk, .rst_n, .hclk_en, .qclk_en, .q_odd
  );

  ext_interface #(.EV_W(EV_W), .TS_W(TS_W)) u_ext (
    .clk, .rst_n, .hclk_en, .ext_write, .ext_din, .avail(ext_avail),
    .ev, .valid_ev, .ext_ts, .valid_ext_ts
  );

  time_select #(.MODE(MODE), .TS_W(TS_W), .CLK_PERIOD(CLK_PERIOD)) u_time (
    .clk, .rst_n, .ext_ts, .valid_ext_ts, .its, .valid_its
  );

  generate
    if (MODE == MODE_OFFLINE) begin : g_buffer
      logic [TS_W+EV_W-1:0] head;
      input_buffer #(.DEPTH(BUF_DEPTH), .W(TS_W+EV_W)) u_buffer (
        .clk, .rst_n, .hclk_en,
        .in_valid(valid_its), .in_data({its, ev}), .hold,
        .head_valid(s_valid), .head_data(head), .overflow(buf_overflow)
      );
      assign s_its = head[TS_W+EV_W-1:EV_W];
      assign s_ev  = head[EV_W-1:0];
    end else begin : g_direct
      assign s_its        = its;
      assign s_ev         = ev;
      assign s_valid      = valid_ev;
      assign buf_overflow = 1'b0;
    end
  endgenerate

  scheduler #(
    .MODE(MODE), .TS_W(TS_W), .NUM_DL(NUM_DL), .HYPER_PERIOD(HYPER_PERIOD),
    .DL_OFFSET(DL_OFFSET)
  ) u_sched (
    .clk, .rst_n, .hclk_en,
    .its(s_its), .valid_its((MODE == MODE_ONLINE) ? 1'b1 : s_valid),
    .hold, .dl_valid, .dl_did, .dl_ts
  );

  event_delay #(.MODE(MODE), .EV_W(EV_W), .TS_W(TS_W)) u_delay (
    .clk, .rst_n, .hclk_en,
    .its(s_its), .ev(s_ev), .valid_ev(s_valid), .hold,
    .tev_ts, .tev_ev, .valid_tev
  );

  hlq_interface #(
    .EV_W(EV_W), .TS_W(TS_W), .N_IN(N_IN), .N_OUT(N_OUT), .NUM_DL(NUM_DL),
    .IN_VALID_POS(IN_VALID_POS), .DEP(DEP), .DL_TARGET(DL_TARGET),
    .DL_FIRST(MODE == MODE_ONLINE)
  ) u_hlq (
    .clk, .rst_n, .qclk_en, .q_odd,
    .tev_ts, .tev_ev, .valid_tev, .dl_ts, .dl_did, .dl_valid,
    .push, .data(q_in)
  );
endmodule
