// llc_tb: the low-level controller on its own. The testbench plays the queue
// (an unbounded list with empty/q_out, popped on `pop`) and feeds entries
// built like the high-level controller builds them: events with a random
// subset of input values, affected mask = OR of dep() over the present
// inputs, and a deadline entry (no input values, mask = the three periodic
// streams) at every full second. A reference model of the network
// specification, kept in this file, predicts every report: the newest value
// and valid bit of every output stream and the three trigger bits.
// The traffic is shaped so that every trigger fires: FIN packets without a
// SYN make closed exceed opened; a burst of more than 10 000 packets to the
// server within half a second fires the connection trigger at the next
// deadline; their lengths push the 1 s workload above 10^7.
module llc_tb;
  import rtlola_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                   empty, pop, report, busy;
  logic [QE_W-1:0]        q_out;
  logic [N_TRIG-1:0]      trig;
  logic [TS_W-1:0]        eval_ts;
  logic [N_OUT-1:0]       eval_aff, out_valid;
  logic signed [63:0]     out_val [N_OUT];

  llc dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // ------------------------------------------------------ reference model
  class net_model;
    logic [31:0] dst, len;
    logic fin, push, syn;
    logic signed [63:0] val [N_OUT];
    logic [N_OUT-1:0] valid;
    longint unsigned w0_b, w1_b;
    longint signed   w0_s, w1_s;
    logic [N_TRIG-1:0] trig;

    function new();
      dst = 0; len = 0; fin = 0; push = 0; syn = 0;
      foreach (val[j]) val[j] = 0;
      valid = 0; w0_b = 0; w1_b = 0; w0_s = 0; w1_s = 0; trig = 0;
    endfunction

    static function longint unsigned bucket(longint unsigned ts, longint unsigned p);
      return (ts + p - 1) / p;   // bucket (k-1)p < ts <= kp
    endfunction

    function void step(qentry_t e);
      longint unsigned b;
      logic signed [31:0] op, cl;
      if (e.ev.dst_v)    dst  = e.ev.dst;
      if (e.ev.fin_v)    fin  = e.ev.fin;
      if (e.ev.push_v)   push = e.ev.push;
      if (e.ev.syn_v)    syn  = e.ev.syn;
      if (e.ev.length_v) len  = e.ev.length;
      // windows: evict
      b = bucket(e.ts, NS_PER_S / 2); if (b > w0_b) begin w0_b = b; w0_s = 0; end
      b = bucket(e.ts, NS_PER_S);     if (b > w1_b) begin w1_b = b; w1_s = 0; end
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

  // --------------------------------------------------------- queue model
  qentry_t q [$];
  qentry_t sent [$];
  assign empty = (q.size() == 0);
  assign q_out = empty ? '0 : q[0];

  always @(posedge clk) if (rst_n && pop) begin
    check(!empty, "pop on empty queue");
    sent.push_back(q[0]);
    #1 q.pop_front();
  end

  // ----------------------------------------------------------- stimulus
  longint unsigned now_ts = 0;
  longint unsigned next_dl = NS_PER_S;
  int n_trig [N_TRIG];
  int n_reports = 0, n_dl = 0;

  task automatic push_entry(qentry_t e);
    q.push_back(e);
  endtask

  task automatic add_event(net_event_t ev, longint unsigned dt);
    qentry_t e;
    now_ts += dt;
    while (now_ts >= next_dl) begin
      e = '0; e.ts = next_dl; e.aff = DL_TARGET[0];
      push_entry(e);
      next_dl += NS_PER_S;
    end
    e.ev = ev; e.ts = now_ts; e.aff = aff_of(ev);
    push_entry(e);
  endtask

  function automatic net_event_t rand_event(int p_server, int p_syn, int p_fin);
    net_event_t ev = '0;
    ev.src   = $urandom();               ev.src_v    = $urandom_range(0, 3) != 0;
    ev.dst   = ($urandom_range(0, 99) < p_server) ? SERVER_IP : $urandom();
    ev.dst_v = $urandom_range(0, 7) != 0;
    ev.syn   = $urandom_range(0, 99) < p_syn;  ev.syn_v  = $urandom_range(0, 3) != 0;
    ev.fin   = $urandom_range(0, 99) < p_fin;  ev.fin_v  = $urandom_range(0, 3) != 0;
    ev.push  = $urandom_range(0, 1);            ev.push_v = $urandom_range(0, 3) != 0;
    ev.length = $urandom_range(40, 1500);       ev.length_v = $urandom_range(0, 7) != 0;
    return ev;
  endfunction

  // --------------------------------------------------------- checker
  net_model m = new();

  always @(posedge clk) if (rst_n && report) begin
    qentry_t e;
    n_reports++;
    if (sent.size() == 0) begin
      check(0, "report without a popped entry");
    end else begin
      e = sent.pop_front();
      m.step(e);
      check(eval_ts == e.ts && eval_aff == e.aff, "report carries the entry's ts and mask");
      check(out_valid == m.valid, $sformatf("valid bits %b, expected %b", out_valid, m.valid));
      for (int j = 0; j < N_OUT; j++)
        check(!m.valid[j] || out_val[j] == m.val[j],
              $sformatf("stream %0d = %0d, expected %0d (ts %0d)", j, out_val[j], m.val[j], e.ts));
      check(trig == m.trig, $sformatf("triggers %b, expected %b (ts %0d)", trig, m.trig, e.ts));
      for (int t = 0; t < N_TRIG; t++) if (trig[t]) n_trig[t]++;
      if (e.aff == DL_TARGET[0]) n_dl++;
    end
  end

  initial begin
    net_event_t ev;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // 0 .. 1 s: mixed traffic, more FIN than SYN to the server
    for (int i = 0; i < 300; i++) begin
      add_event(rand_event(60, 10, 40), $urandom_range(1, 3_000_000));
      if ($urandom_range(0, 20) == 0) repeat ($urandom_range(1, 40)) @(posedge clk);
    end
    wait (q.size() == 0);
    // ... up to 1.5 s: quiet
    now_ts = 64'd1_500_000_000;
    // 1.5 .. 2 s: burst of connection packets to the server
    for (int i = 0; i < 10_200; i++) begin
      ev = rand_event(100, 50, 0);
      ev.dst_v = 1; ev.push = 0; ev.push_v = 1; ev.length = 1400; ev.length_v = 1;
      add_event(ev, 40_000);
      if (q.size() > 64) wait (q.size() < 16);
    end
    // 2 .. 3.2 s: light traffic
    for (int i = 0; i < 100; i++) add_event(rand_event(30, 50, 5), 12_000_000);
    wait (q.size() == 0);
    repeat (50) @(posedge clk);
    check(sent.size() == 0, "every entry reported");
    check(n_dl == 3, $sformatf("%0d deadline evaluations", n_dl));
    for (int t = 0; t < N_TRIG; t++)
      check(n_trig[t] > 0, $sformatf("trigger %0d fired %0d times", t, n_trig[t]));
    $display("reports=%0d deadlines=%0d triggers=%0d/%0d/%0d", n_reports, n_dl,
             n_trig[0], n_trig[1], n_trig[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
