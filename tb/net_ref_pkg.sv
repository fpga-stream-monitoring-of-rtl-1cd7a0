// net_ref_pkg: reference model and scoreboard for the network-traffic
// specification, shared by the testbenches of the low-level controller and
// of the whole monitor. It is written from the specification, not from the
// RTL: input streams keep their newest value; each evaluation computes the
// affected output streams layer by layer; the two sums are kept per bucket
// (a time stamp ts lies in bucket k when (k-1)*P < ts <= k*P, P the bucket
// length), reset when the time stamp moves into a later bucket, and read as
// 0 until the window's full length has passed since time 0.
//
// The scoreboard takes the events a testbench sent, in order, with the range
// of time stamps each may get, and checks every report of the monitor: the
// time stamp, the affected mask, the value and valid bit of all eight output
// streams and the three trigger bits. Deadlines are recognised by their
// mask (the periodic streams, which no event reaches) and must come at
// base + 1 s, base + 2 s, ...; no event may be reported before a deadline
// that is not later than its time stamp. It also counts the mechanisms it
// sees.
package net_ref_pkg;
  import rtlola_pkg::*;

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

  // random event: each input present with probability 3/4 (dst, length 7/8)
  function automatic net_event_t rand_event(int p_server, int p_syn, int p_fin);
    net_event_t ev = '0;
    ev.src   = $urandom();               ev.src_v    = $urandom_range(0, 3) != 0;
    ev.dst   = ($urandom_range(0, 99) < p_server) ? SERVER_IP : $urandom();
    ev.dst_v = $urandom_range(0, 7) != 0;
    ev.syn   = $urandom_range(0, 99) < p_syn;  ev.syn_v  = $urandom_range(0, 3) != 0;
    ev.fin   = $urandom_range(0, 99) < p_fin;  ev.fin_v  = $urandom_range(0, 3) != 0;
    ev.push  = 1'($urandom_range(0, 1));        ev.push_v = $urandom_range(0, 3) != 0;
    ev.length = $urandom_range(40, 1500);       ev.length_v = $urandom_range(0, 7) != 0;
    return ev;
  endfunction

  // a packet to the server that counts towards both sums
  function automatic net_event_t server_packet(logic syn, int unsigned len);
    net_event_t ev = '0;
    ev.src = $urandom(); ev.src_v = 1'b1;
    ev.dst = SERVER_IP;  ev.dst_v = 1'b1;
    ev.syn = syn;        ev.syn_v = 1'b1;
    ev.fin = 1'b0;       ev.fin_v = 1'b1;
    ev.push = 1'b0;      ev.push_v = 1'b1;
    ev.length = len;     ev.length_v = 1'b1;
    return ev;
  endfunction

  class net_model;
    logic [31:0] dst, len;
    logic fin, push, syn;
    logic signed [63:0] val [N_OUT];
    logic [N_OUT-1:0] valid;
    longint unsigned w0_b, w1_b;
    longint signed   w0_s, w1_s;
    logic [N_TRIG-1:0] trig;
    int n_evict, n_multi_evict;

    function new();
      dst = 0; len = 0; fin = 0; push = 0; syn = 0;
      foreach (val[j]) val[j] = 0;
      valid = 0; w0_b = 0; w1_b = 0; w0_s = 0; w1_s = 0; trig = 0;
      n_evict = 0; n_multi_evict = 0;
    endfunction

    static function longint unsigned bucket(longint unsigned ts, longint unsigned p);
      return (ts + p - 1) / p;
    endfunction

    function void step(qentry_t e);
      longint unsigned b;
      logic signed [31:0] op, cl;
      if (e.ev.dst_v)    dst  = e.ev.dst;
      if (e.ev.fin_v)    fin  = e.ev.fin;
      if (e.ev.push_v)   push = e.ev.push;
      if (e.ev.syn_v)    syn  = e.ev.syn;
      if (e.ev.length_v) len  = e.ev.length;
      b = bucket(e.ts, NS_PER_S / 2);
      if (b > w0_b) begin
        n_evict++;
        if (b > w0_b + 1) n_multi_evict++;
        w0_b = b; w0_s = 0;
      end
      b = bucket(e.ts, NS_PER_S);
      if (b > w1_b) begin
        n_evict++;
        if (b > w1_b + 1) n_multi_evict++;
        w1_b = b; w1_s = 0;
      end
      // layer 1
      if (e.aff[O_RECEIVER]) val[O_RECEIVER] = (dst == SERVER_IP);
      if (e.aff[O_OPENED]) begin
        op = valid[O_OPENED] ? 32'(val[O_OPENED]) : 0;
        val[O_OPENED] = 64'(op + ((dst == SERVER_IP && syn) ? 1 : 0));
      end
      if (e.aff[O_CLOSED]) begin
        cl = valid[O_CLOSED] ? 32'(val[O_CLOSED]) : 0;
        val[O_CLOSED] = 64'(cl + ((dst == SERVER_IP && fin) ? 1 : 0));
      end
      valid |= e.aff & 8'b0000_0111;
      // layer 2
      if (e.aff[O_RECEIVER]) w0_s += val[O_RECEIVER];
      if (e.aff[O_RECEIVED]) val[O_RECEIVED] = (val[O_RECEIVER][0] && push) ? 0 : 64'(signed'(len));
      if (e.aff[O_TRIG_CLOSED]) val[O_TRIG_CLOSED] = (32'(val[O_OPENED]) - 32'(val[O_CLOSED])) < 0;
      if (e.aff[O_MANY_CONN])
        val[O_MANY_CONN] = ((e.ts >= NS_PER_S / 2) ? w0_s : 0) > MANY_CONN_LIMIT;
      valid |= e.aff & 8'b0011_1000;
      // layer 3
      if (e.aff[O_RECEIVED]) w1_s += val[O_RECEIVED];
      if (e.aff[O_WORKLOAD]) val[O_WORKLOAD] = (e.ts >= NS_PER_S) ? w1_s : 0;
      // layer 4
      if (e.aff[O_TRIG_WORKLOAD]) val[O_TRIG_WORKLOAD] = val[O_WORKLOAD] > WORKLOAD_LIMIT;
      valid |= e.aff & 8'b1100_0000;
      trig = {e.aff[O_TRIG_WORKLOAD] && val[O_TRIG_WORKLOAD][0],
              e.aff[O_MANY_CONN] && val[O_MANY_CONN][0],
              e.aff[O_TRIG_CLOSED] && val[O_TRIG_CLOSED][0]};
    endfunction
  endclass

  class scoreboard;
    string name;
    net_model m;
    net_event_t sent_ev [$];
    longint unsigned sent_lo [$], sent_hi [$];
    longint unsigned next_dl;
    int checks, failures;
    int n_ev, n_dl, n_same_period, n_reports;
    int n_trig [N_TRIG];
    bit last_was_dl;
    longint unsigned last_ts;
    longint unsigned same_window;   // one hclk period, in ns (online)

    function new(string name_i, longint unsigned base);
      name = name_i; m = new(); next_dl = base + NS_PER_S;
      checks = 0; failures = 0; n_ev = 0; n_dl = 0; n_same_period = 0; n_reports = 0;
      foreach (n_trig[t]) n_trig[t] = 0;
      last_was_dl = 0; last_ts = 0; same_window = 0;
    endfunction

    function void set_base(longint unsigned base);
      next_dl = base + NS_PER_S;
    endfunction

    function void check(bit cond, string what);
      checks++;
      if (!cond) begin
        failures++;
        if (failures < 20) $display("FAIL %s @%0t: %s", name, $time, what);
      end
    endfunction

    function void sent(net_event_t ev, longint unsigned lo, longint unsigned hi);
      sent_ev.push_back(ev); sent_lo.push_back(lo); sent_hi.push_back(hi);
    endfunction

    function int pending();
      return sent_ev.size();
    endfunction

    function void report(logic [N_TRIG-1:0] trig, ts_t ts, out_mask_t aff,
                         logic signed [63:0] val [N_OUT], out_mask_t valid);
      qentry_t e;
      n_reports++;
      e = '0; e.ts = ts; e.aff = aff;
      if ((aff & DL_TARGET[0]) != '0) begin
        n_dl++;
        check(aff == DL_TARGET[0], $sformatf("deadline mask %b", aff));
        check(ts == next_dl, $sformatf("deadline ts %0d, expected %0d", ts, next_dl));
        next_dl += NS_PER_S;
        last_was_dl = 1; last_ts = ts;
      end else begin
        n_ev++;
        if (sent_ev.size() == 0) begin
          check(0, "event report without a sent event");
          return;
        end
        e.ev = sent_ev.pop_front();
        check(ts >= sent_lo[0] && ts <= sent_hi[0],
              $sformatf("event ts %0d outside [%0d, %0d]", ts, sent_lo[0], sent_hi[0]));
        void'(sent_lo.pop_front()); void'(sent_hi.pop_front());
        check(aff == aff_of(e.ev), $sformatf("event mask %b, expected %b", aff, aff_of(e.ev)));
        check(ts < next_dl, $sformatf("event ts %0d reported before the deadline at %0d", ts, next_dl));
        // an event stamped within one hclk period of the deadline just
        // reported arrived at the very tick the deadline became due
        if (last_was_dl && ts < last_ts + same_window) n_same_period++;
        last_was_dl = 0;
      end
      m.step(e);
      check(valid == m.valid, $sformatf("valid bits %b, expected %b", valid, m.valid));
      for (int j = 0; j < N_OUT; j++)
        check(!m.valid[j] || val[j] == m.val[j],
              $sformatf("stream %0d = %0d, expected %0d (ts %0d)", j, val[j], m.val[j], ts));
      check(trig == m.trig, $sformatf("triggers %b, expected %b (ts %0d)", trig, m.trig, ts));
      for (int t = 0; t < N_TRIG; t++) if (trig[t]) n_trig[t]++;
    endfunction

    function void summary();
      $display("%s: reports=%0d events=%0d deadlines=%0d same-period=%0d evictions=%0d multi-bucket=%0d triggers=%0d/%0d/%0d",
               name, n_reports, n_ev, n_dl, n_same_period, m.n_evict, m.n_multi_evict,
               n_trig[0], n_trig[1], n_trig[2]);
    endfunction
  endclass

endpackage
