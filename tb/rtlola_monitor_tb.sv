// rtlola_monitor_tb: the whole monitor, end to end, in three instances that
// run side by side.
//   u_on    online mode, one clock cycle standing for 2 us so that three
//           seconds of monitored time take 1.5 million cycles. Random
//           traffic, FIN-heavy at first (closed overtakes opened), bursts of
//           writes around each full second (an event and a deadline in the
//           same prescaler period), and from 1.55 s a burst of 10 100 packets
//           to the server (both periodic triggers fire at the 2 s deadline).
//   u_off   offline mode at the default clock: events carry time stamps with
//           gaps of up to three seconds (several deadlines before one event,
//           the scheduler holding the input, buckets evicted several at a
//           time), and short write bursts that fill the input buffer.
//   u_small online mode with a two-entry queue, written as fast as the
//           external interface accepts: the writer stalls and the queue drops
//           entries, and every entry (events written and one deadline per
//           second) is either reported or counted as dropped.
// Every report of u_on and u_off is checked against the reference model in
// net_ref_pkg; online event time stamps must lie within 12 cycles of the
// write. Each mechanism below is counted and one that never happened is a
// failure.
module rtlola_monitor_tb;
  import rtlola_pkg::*;
  import net_ref_pkg::*;

  localparam longint unsigned CP = 2000;             // ns per cycle, online instances
  localparam longint unsigned CYC_PER_S = NS_PER_S / CP;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  longint unsigned cyc = 0;
  always @(posedge clk) if (rst_n) cyc++;

  // ------------------------------------------------------------ instances
  logic                 on_write, on_avail, on_report, on_hold, on_ovf;
  logic [TS_W+EV_W-1:0] on_din;
  logic [N_TRIG-1:0]    on_trig;
  logic [TS_W-1:0]      on_ts;
  logic [N_OUT-1:0]     on_aff, on_valid;
  logic signed [63:0]   on_val [N_OUT];
  logic [15:0]          on_drops;

  rtlola_monitor #(.MODE(MODE_ONLINE), .CLK_PERIOD(CP)) u_on (
    .clk, .rst_n, .ext_write(on_write), .ext_din(on_din), .ext_avail(on_avail),
    .report(on_report), .trig(on_trig), .eval_ts(on_ts), .eval_aff(on_aff),
    .out_val(on_val), .out_valid(on_valid), .hold(on_hold), .buf_overflow(on_ovf),
    .q_drops(on_drops)
  );

  logic                 off_write, off_avail, off_report, off_hold, off_ovf;
  logic [TS_W+EV_W-1:0] off_din;
  logic [N_TRIG-1:0]    off_trig;
  logic [TS_W-1:0]      off_ts;
  logic [N_OUT-1:0]     off_aff, off_valid;
  logic signed [63:0]   off_val [N_OUT];
  logic [15:0]          off_drops;

  rtlola_monitor #(.MODE(MODE_OFFLINE)) u_off (
    .clk, .rst_n, .ext_write(off_write), .ext_din(off_din), .ext_avail(off_avail),
    .report(off_report), .trig(off_trig), .eval_ts(off_ts), .eval_aff(off_aff),
    .out_val(off_val), .out_valid(off_valid), .hold(off_hold), .buf_overflow(off_ovf),
    .q_drops(off_drops)
  );

  logic                 sm_write, sm_avail, sm_report, sm_hold, sm_ovf;
  logic [TS_W+EV_W-1:0] sm_din;
  logic [N_TRIG-1:0]    sm_trig;
  logic [TS_W-1:0]      sm_ts;
  logic [N_OUT-1:0]     sm_aff, sm_valid;
  logic signed [63:0]   sm_val [N_OUT];
  logic [15:0]          sm_drops;

  rtlola_monitor #(.MODE(MODE_ONLINE), .CLK_PERIOD(CP), .QUEUE_DEPTH(2)) u_small (
    .clk, .rst_n, .ext_write(sm_write), .ext_din(sm_din), .ext_avail(sm_avail),
    .report(sm_report), .trig(sm_trig), .eval_ts(sm_ts), .eval_aff(sm_aff),
    .out_val(sm_val), .out_valid(sm_valid), .hold(sm_hold), .buf_overflow(sm_ovf),
    .q_drops(sm_drops)
  );

  // ------------------------------------------------------------ scoreboards
  scoreboard sb_on  = new("online", 0);
  scoreboard sb_off = new("offline", 0);

  initial sb_on.same_window = 4 * CP;   // PRESCALE cycles

  always @(posedge clk) if (rst_n && on_report)
    sb_on.report(on_trig, on_ts, on_aff, on_val, on_valid);
  always @(posedge clk) if (rst_n && off_report)
    sb_off.report(off_trig, off_ts, off_aff, off_val, off_valid);

  // ------------------------------------------------------------ counters
    int n_hold = 0, max_buf = 0, n_stall = 0, sm_written = 0, sm_reports = 0;
  always @(posedge clk) if (rst_n) begin
    if (off_hold) n_hold++;
    if ($countones(u_off.u_hlc.g_buffer.u_buffer.used) > max_buf)
      max_buf = $countones(u_off.u_hlc.g_buffer.u_buffer.used);
    if (sm_report) sm_reports++;
  end

  // ------------------------------------------------------------ online driver
  bit on_done = 0;

  task automatic on_send(net_event_t ev);
    @(negedge clk iff !on_avail);
    on_din = {64'd0, ev};
    on_write = 1;
    sb_on.sent(ev, (cyc > 0 ? cyc - 1 : 0) * CP, (cyc + 12) * CP);
    @(negedge clk);
    on_write = 0;
  endtask

  task automatic on_idle_until(longint unsigned c);
    while (cyc < c) @(negedge clk);
  endtask

  task automatic on_random_until(longint unsigned c, int p_syn, int p_fin, int gmin, int gmax);
    while (cyc + gmax < c) begin
      on_send(rand_event(60, p_syn, p_fin));
      repeat ($urandom_range(gmin, gmax)) @(negedge clk);
    end
    on_idle_until(c);
  endtask

  // one write per prescaler period across a full-second boundary
  task automatic on_dense_around(longint unsigned c);
    on_idle_until(c - 14);
    repeat (7) on_send(rand_event(60, 30, 30));
  endtask

  initial begin
    on_write = 0; on_din = '0;
    wait (rst_n);
    on_random_until(CYC_PER_S - 200, 10, 40, 16, 2000);
    on_dense_around(CYC_PER_S);
    on_random_until(3 * CYC_PER_S / 2 + 50_000, 30, 10, 1000, 5000);
    for (int i = 0; i < 10_100; i++) begin
      on_send(server_packet(1'($urandom_range(0, 1)), 1400));
      repeat (12) @(negedge clk);
    end
    on_random_until(2 * CYC_PER_S - 200, 30, 10, 200, 1000);
    on_dense_around(2 * CYC_PER_S);
    on_random_until(3 * CYC_PER_S - 200, 30, 10, 1000, 8000);
    on_dense_around(3 * CYC_PER_S);
    on_idle_until(3 * CYC_PER_S + 200);
    on_done = 1;
  end

  // ------------------------------------------------------------ offline driver
  bit off_done = 0;

  task automatic off_send(net_event_t ev, longint unsigned ts);
    @(negedge clk iff !off_avail);
    off_din = {ts, ev};
    off_write = 1;
    sb_off.sent(ev, ts, ts);
    @(negedge clk);
    off_write = 0;
  endtask

  initial begin
    longint unsigned ts, dl;
    off_write = 0; off_din = '0;
    ts = 5_000_000;
    dl = ts + NS_PER_S;
    sb_off.set_base(ts);       // offline time starts with the first event
    wait (rst_n);
    for (int i = 0; i < 400; i++) begin
      if (i % 50 == 49)      ts += $urandom_range(1, 3) * NS_PER_S + $urandom_range(0, 999);
      else if (i == 120)     ts = dl;               // exactly on a deadline
      else if (i > 0)        ts += $urandom_range(0, 60_000_000);
      while (dl <= ts) dl += NS_PER_S;
      off_send(rand_event(60, 15, 35), ts);
      if (i % 50 < 44) repeat ($urandom_range(20, 60)) @(negedge clk);  // bursts otherwise
      if (i % 50 == 45) repeat (120) @(negedge clk);                   // let the queue drain
    end
    repeat (200) @(negedge clk);
    off_done = 1;
  end

  // ------------------------------------------------------------ small-queue driver
  bit sm_done = 0;
  initial begin
    sm_write = 0; sm_din = '0;
    wait (rst_n);
    repeat (3000) begin
      @(negedge clk);
      sm_write = 0;
      if (sm_avail) n_stall++;
      else begin
        sm_din = {64'd0, rand_event(50, 50, 50)};
        sm_write = 1;
        sm_written++;
      end
    end
    @(negedge clk) sm_write = 0;
    repeat (200) @(negedge clk);
    sm_done = 1;
  end

  // ------------------------------------------------------------ end
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (on_done && off_done && sm_done);
    repeat (100) @(posedge clk);
    sb_on.summary();
    sb_off.summary();
    $display("offline hold cycles=%0d max buffered=%0d; small queue written=%0d reported=%0d dropped=%0d stalls=%0d",
             n_hold, max_buf, sm_written, sm_reports, sm_drops, n_stall);
    check(sb_on.pending() == 0, "online: every event reported");
    check(sb_off.pending() == 0, "offline: every event reported");
    check(on_drops == 0 && off_drops == 0, "no queue drops in the checked instances");
    check(!off_ovf, "offline: no input buffer overflow");
    check(sb_on.n_dl == 3, $sformatf("online: %0d deadlines", sb_on.n_dl));
    check(sm_reports + int'(sm_drops) == sm_written + int'(cyc / CYC_PER_S),
          "small queue: reported + dropped = written + deadlines");
    // mechanisms
    check(sb_on.n_ev > 0,              "mechanism: online event evaluation");
    check(sb_on.n_dl > 0,              "mechanism: online deadline evaluation");
    check(sb_off.n_ev > 0,             "mechanism: offline event evaluation");
    check(sb_off.n_dl > 0,             "mechanism: offline deadline evaluation");
    check(sb_on.n_same_period > 0,     "mechanism: event and deadline in one prescaler period");
    check(sb_on.m.n_evict + sb_off.m.n_evict > 0, "mechanism: window bucket eviction");
    check(sb_off.m.n_multi_evict > 0,  "mechanism: eviction of several buckets in one evaluation");
    for (int t = 0; t < N_TRIG; t++)
      check(sb_on.n_trig[t] + sb_off.n_trig[t] > 0, $sformatf("mechanism: trigger %0d", t));
    check(n_hold > 0,                  "mechanism: offline scheduler hold");
    check(max_buf >= 2,                "mechanism: offline input buffer holding events");
    check(n_stall > 0,                 "mechanism: external interface busy");
    check(sm_drops > 0,                "mechanism: queue overflow (dropped entry)");
    checks += sb_on.checks + sb_off.checks;
    failures += sb_on.failures + sb_off.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_500_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb_on.checks + sb_off.checks,
             failures + sb_on.failures + sb_off.failures);
    $finish;
  end
endmodule
