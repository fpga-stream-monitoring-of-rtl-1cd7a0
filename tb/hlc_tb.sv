// hlc_tb: the high-level controller in both modes, side by side.
// Online instance: one clock cycle stands for 1 ms (CLK_PERIOD override) so
// that the 1 s deadline falls every 1000 cycles. Events are written at
// random; every queue entry is checked: event entries carry the written
// event, its affected mask and a time stamp within a few prescaler periods of
// the write; deadline entries carry the deadline mask, an empty event and the
// exact time 1 s, 2 s, ... and appear at most three prescaler periods later.
// Offline instance: events carry their own, increasing time stamps, with
// jumps that cover up to three deadlines. The schedule starts at the first
// event's time stamp. The whole entry sequence must equal the reference
// order: each deadline before the first event whose time stamp reaches it,
// then the event. The scheduler's hold must have been
// used, the input buffer must have queued events while held, and it must
// never overflow.
module hlc_tb;
  import rtlola_pkg::*;

  localparam longint unsigned CP_ON = 1_000_000;   // 1 ms per cycle

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic out_mask_t aff_of(net_event_t ev);
    out_mask_t m = '0;
    if (ev.src_v)    m |= DEP[I_SRC];
    if (ev.dst_v)    m |= DEP[I_DST];
    if (ev.fin_v)    m |= DEP[I_FIN];
    if (ev.push_v)   m |= DEP[I_PUSH];
    if (ev.syn_v)    m |= DEP[I_SYN];
    if (ev.length_v) m |= DEP[I_LEN];
    return m;
  endfunction

  function automatic net_event_t rand_event();
    net_event_t ev;
    ev = {$urandom(), $urandom(), $urandom(), $urandom()};
    return ev;
  endfunction

  longint unsigned cyc = 0;
  always @(posedge clk) if (rst_n) cyc++;

  // ============================================================ online
  logic                 on_write, on_avail, on_push, on_hold, on_ovf;
  logic [TS_W+EV_W-1:0] on_din;
  logic [QE_W-1:0]      on_qin;

  hlc #(.MODE(MODE_ONLINE), .CLK_PERIOD(CP_ON)) u_on (
    .clk, .rst_n, .ext_write(on_write), .ext_din(on_din), .ext_avail(on_avail),
    .push(on_push), .q_in(on_qin), .hold(on_hold), .buf_overflow(on_ovf)
  );

  typedef struct { net_event_t ev; longint unsigned cyc; } on_rec_t;
  on_rec_t on_sent [$];
  int on_events = 0, on_dls = 0;
  longint unsigned on_next_dl = NS_PER_S;

  always @(posedge clk) if (rst_n && on_push) begin
    qentry_t e;
    e = qentry_t'(on_qin);
    if (e.aff == DL_TARGET[0] && e.ev == '0) begin
      on_dls++;
      check(e.ts == on_next_dl, $sformatf("online deadline ts %0d, expected %0d", e.ts, on_next_dl));
      check(cyc * CP_ON >= e.ts && cyc * CP_ON <= e.ts + 12 * CP_ON,
            $sformatf("online deadline at cycle %0d for ts %0d", cyc, e.ts));
      on_next_dl += NS_PER_S;
    end else begin
      on_events++;
      if (on_sent.size() == 0) check(0, "online: entry without an event");
      else begin
        on_rec_t r;
        r = on_sent.pop_front();
        check(e.ev == r.ev && e.aff == aff_of(r.ev), "online event and mask");
        check(e.ts >= r.cyc * CP_ON && e.ts <= (r.cyc + 12) * CP_ON,
              $sformatf("online event ts %0d written at cycle %0d", e.ts, r.cyc));
      end
    end
  end

  initial begin
    on_write = 0; on_din = '0;
    wait (rst_n);
    while (cyc < 3500) begin
      @(negedge clk);
      on_write = 0;
      if (!on_avail && $urandom_range(0, 9) == 0) begin
        on_rec_t r;
        r.ev = rand_event(); r.cyc = cyc;
        on_din = {64'hdead_beef, r.ev};   // the time stamp field is ignored online
        on_write = 1;
        on_sent.push_back(r);
      end
    end
    on_write = 0;
  end

  // ============================================================ offline
  logic                 off_write, off_avail, off_push, off_hold, off_ovf;
  logic [TS_W+EV_W-1:0] off_din;
  logic [QE_W-1:0]      off_qin;

  hlc #(.MODE(MODE_OFFLINE), .BUF_DEPTH(4)) u_off (
    .clk, .rst_n, .ext_write(off_write), .ext_din(off_din), .ext_avail(off_avail),
    .push(off_push), .q_in(off_qin), .hold(off_hold), .buf_overflow(off_ovf)
  );

  qentry_t off_expect [$];
  int off_got = 0, off_dls = 0, hold_cycles = 0, max_buffered = 0;
  longint unsigned off_next_dl = NS_PER_S;

  always @(posedge clk) if (rst_n) begin
    if (off_hold) hold_cycles++;
    if ($countones(u_off.g_buffer.u_buffer.used) > max_buffered)
      max_buffered = $countones(u_off.g_buffer.u_buffer.used);
  end

  always @(posedge clk) if (rst_n && off_push) begin
    qentry_t e;
    e = qentry_t'(off_qin);
    off_got++;
    if (e.aff == DL_TARGET[0] && e.ev == '0) off_dls++;
    if (off_expect.size() == 0) check(0, "offline: unexpected entry");
    else begin
      qentry_t x;
      x = off_expect.pop_front();
      check(e == x, $sformatf("offline entry %0d: ts %0d aff %b, expected ts %0d aff %b",
                              off_got, e.ts, e.aff, x.ts, x.aff));
    end
  end

  initial begin
    longint unsigned ts;
    net_event_t ev;
    qentry_t x;
    off_write = 0; off_din = '0;
    ts = 0;
    wait (rst_n);
    for (int i = 0; i < 400; i++) begin
      // every 40th event jumps across up to three deadlines
      if (i % 40 == 39) ts += $urandom_range(1, 3) * NS_PER_S + $urandom_range(0, 1000);
      else if (i == 100) ts = off_next_dl;          // exactly on a deadline
      else ts += $urandom_range(0, 90_000_000);
      ev = rand_event();
      if (i == 0) off_next_dl = ts + NS_PER_S;   // time starts with the first event
      while (off_next_dl <= ts) begin
        x = '0; x.ts = off_next_dl; x.aff = DL_TARGET[0];
        off_expect.push_back(x);
        off_next_dl += NS_PER_S;
      end
      x.ev = ev; x.ts = ts; x.aff = aff_of(ev);
      off_expect.push_back(x);
      @(negedge clk iff !off_avail);
      off_din = {ts, ev};
      off_write = 1;
      @(negedge clk);
      off_write = 0;
      if (i % 40 < 20) repeat ($urandom_range(0, 12)) @(negedge clk);  // bursts in between
    end
  end

  // ============================================================ end
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (cyc >= 3600);
    wait (off_expect.size() == 0 || cyc >= 20_000);
    repeat (40) @(posedge clk);
    check(on_sent.size() == 0, "online: every event forwarded");
    check(on_events > 200, $sformatf("online: %0d events", on_events));
    check(on_dls == 3, $sformatf("online: %0d deadlines", on_dls));
    check(!on_hold && !on_ovf, "online: no hold, no buffer");
    check(off_expect.size() == 0, $sformatf("offline: %0d entries missing", off_expect.size()));
    check(off_dls > 10, $sformatf("offline: %0d deadlines", off_dls));
    check(hold_cycles > 0, "offline: hold used");
    check(max_buffered >= 2, $sformatf("offline: buffer held up to %0d events", max_buffered));
    check(!off_ovf, "offline: no buffer overflow");
    $display("online events=%0d deadlines=%0d; offline entries=%0d deadlines=%0d hold=%0d maxbuf=%0d",
             on_events, on_dls, off_got, off_dls, hold_cycles, max_buffered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
