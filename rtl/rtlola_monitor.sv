// rtlola_monitor: the complete stream monitor for the network-traffic
// specification (rtlola_pkg).
//
//   ext_write/ext_din --> hlc --push/q_in--> event_queue --empty/q_out/pop--> llc --> report, trig
//
// The high-level controller (hlc) turns events from the external source and
// the periodic 1 Hz deadline into queue entries; the queue absorbs bursts;
// the low-level controller (llc) evaluates every affected stream of one entry
// at a time and reports the results and the three trigger bits.
//
// Interface. The external source writes an event with a one-cycle ext_write
// while ext_avail is low; ext_din = {time stamp (TS_W bits, used in offline
// mode only), event (rtlola_pkg::net_event_t)}. Outputs: a one-cycle `report`
// per evaluated entry with its time stamp, affected-stream mask, the newest
// value of every output stream and the trigger bits; `hold` (offline mode,
// deadlines being emitted), `buf_overflow` (offline input buffer dropped an
// event, sticky) and `q_drops` (entries lost at a full queue).
//
// Parameters: MODE (online, the default, or offline), CLK_PERIOD (time units
// per system clock cycle, 10 ns), PRESCALE (system cycles per hclk), the
// queue depth and the offline input-buffer depth.
//
// The split into high-level controller, queue and low-level controller, the
// two modes and the 100 MHz clock follow the paper. The design's own choices
// are a single clock domain with enables in place of the derived clocks, the
// queue depth, prescaler factor and buffer depth (the paper gives no
// numbers), and the reporting outputs. Timing: an event reaches `report`
// about 2 hclk periods plus 12 cycles after it is written, if the queue is
// empty (see hlc and llc).
module rtlola_monitor
  import rtlola_pkg::*;
#(
  parameter mode_e           MODE        = MODE_ONLINE,
  parameter longint unsigned CLK_PERIOD  = CLK_PERIOD_NS,
  parameter int unsigned     PRESCALE    = 4,
  parameter int unsigned     QUEUE_DEPTH = 8,
  parameter int unsigned     BUF_DEPTH   = 4,
  parameter logic [31:0]     SERVER      = SERVER_IP
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ext_write,
  input  logic [TS_W+EV_W-1:0] ext_din,
  output logic                 ext_avail,
  output logic                 report,
  output logic [N_TRIG-1:0]    trig,
  output logic [TS_W-1:0]      eval_ts,
  output logic [N_OUT-1:0]     eval_aff,
  output logic signed [63:0]   out_val [N_OUT],
  output logic [N_OUT-1:0]     out_valid,
  output logic                 hold,
  output logic                 buf_overflow,
  output logic [15:0]          q_drops
);
  logic            push, pop, empty, full, llc_busy;
  logic [QE_W-1:0] q_in, q_out;

  hlc #(
    .MODE(MODE), .CLK_PERIOD(CLK_PERIOD), .PRESCALE(PRESCALE), .BUF_DEPTH(BUF_DEPTH)
  ) u_hlc (
    .clk, .rst_n, .ext_write, .ext_din, .ext_avail,
    .push, .q_in, .hold, .buf_overflow
  );

  event_queue #(.W(QE_W), .DEPTH(QUEUE_DEPTH)) u_queue (
    .clk, .rst_n, .push, .din(q_in), .pop, .empty, .full, .dout(q_out), .drops(q_drops)
  );

  llc #(.SERVER(SERVER)) u_llc (
    .clk, .rst_n, .empty, .q_out, .pop,
    .report, .trig, .eval_ts, .eval_aff, .out_val, .out_valid, .busy(llc_busy)
  );
endmodule
