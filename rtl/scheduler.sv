// scheduler: detects when the next periodic deadline is due.
//
// The hyper-period (least common multiple of all periods) holds NUM_DL
// deadlines; DL_OFFSET[k] is the time of deadline k measured from the start
// of the hyper-period (cumulative, ascending, the last one equal to
// HYPER_PERIOD). Two registers carry the state:
//   period - the time stamp at which the current hyper-period started,
//   did    - the deadline due next, one-hot ("unary"); bit NUM_DL-1 is
//            deadline 0, and the all-zero value means "not started yet".
// Initialisation happens on the first hclk tick after reset in online mode
// (period = 0) and on the first tick with a valid time stamp in offline mode
// (period = that time stamp). After that, `prog` is raised whenever the
// position its - period inside the hyper-period has reached the offset
// selected by did (the lookup is an AND-OR of the offsets with the did bits).
// On each hclk tick with prog set, did rotates right by one and, after the
// last deadline of the hyper-period, period advances by HYPER_PERIOD.
//
// Outputs, registered on the hclk tick: dl_valid for one hclk period per
// deadline, dl_did (the deadline's one-hot id) and dl_ts (its time stamp).
// `hold` (offline mode only) is prog itself: it stalls the current event
// while the deadlines it has made due are emitted, one per hclk tick.
//
// Follows the paper's registers, the unary encoding, the rotation and the
// hold = prog rule. Differences chosen here: the due test is >= rather than
// the paper's >, and the deadline carries its nominal time period + offset
// instead of the current its, so that windows evaluated at a deadline see
// exactly the deadline time (the current its may already be past the end of
// the newest window bucket). The paper's "valid_dl = not prog" is read as
// "a deadline is emitted when prog is set", matching its description of prog.
module scheduler
#(
  parameter rtlola_pkg::mode_e           MODE         = rtlola_pkg::MODE_ONLINE,
  parameter int unsigned     TS_W         = 64,
  parameter int unsigned     NUM_DL       = 1,
  parameter longint unsigned HYPER_PERIOD = 1_000_000_000,
  parameter logic [TS_W-1:0] DL_OFFSET [NUM_DL] = '{default: TS_W'(HYPER_PERIOD)}
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hclk_en,
  input  logic [TS_W-1:0]   its,
  input  logic              valid_its,
  output logic              hold,
  output logic              dl_valid,
  output logic [NUM_DL-1:0] dl_did,
  output logic [TS_W-1:0]   dl_ts
);
  logic [NUM_DL-1:0] did;
  logic [TS_W-1:0]   period;
  logic [TS_W-1:0]   dl_sel;
  logic              init, prog;

  always_comb begin
    dl_sel = '0;
    for (int k = 0; k < NUM_DL; k++)
      dl_sel |= DL_OFFSET[k] & {TS_W{did[NUM_DL-1-k]}};
  end

  assign init = (did == '0) && (MODE == rtlola_pkg::MODE_ONLINE || valid_its);
  assign prog = (did != '0) && valid_its && ((its - period) >= dl_sel);
  assign hold = (MODE == rtlola_pkg::MODE_OFFLINE) && prog;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      did      <= '0;
      period   <= '0;
      dl_valid <= 1'b0;
      dl_did   <= '0;
      dl_ts    <= '0;
    end else if (hclk_en) begin
      dl_valid <= prog;
      dl_did   <= did;
      dl_ts    <= period + dl_sel;
      if (init) begin
        did    <= {1'b1, {(NUM_DL-1){1'b0}}} ;
        period <= (MODE == rtlola_pkg::MODE_ONLINE) ? '0 : its;
      end else if (prog) begin
        did <= NUM_DL'({did[0], did} >> 1);   // cyclic shift right
        if (did[0]) period <= period + TS_W'(HYPER_PERIOD);
      end
    end
  end

  // did is either zero (not started) or one-hot.
  a_did_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                                 did == '0 || $onehot(did));
endmodule
