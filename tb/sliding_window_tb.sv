// sliding_window_tb: self-checking test of the bucketed sliding window.
//
// Three windows of 3 buckets with a bucket period of 10 time units (1 unit =
// 0.1 s) see the same stimulus: AVG, SUM and MAX. Part 1 replays the sliding
// average example (events 10.0 at 0.5 s, 10.1 at 0.6 s, 9.9 at 2.2 s, reads
// at 1, 2 and 3 s; values scaled by 10): the first two reads must fall back
// to the default, the read at 3 s must give 100 (10.0) and the buckets must
// be evicted the expected number of times. Part 2 drives random events and
// reads and compares every read with a reference that sums, averages and
// maximises the values whose time stamp lies in (t - 30, t]. Part 3 checks an
// update and a read in the same cycle (the bypass).
module sliding_window_tb;
  import rtlola_pkg::*;

  localparam int unsigned P = 10;
  localparam int unsigned B = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [63:0]        ts;
  logic               evict, upd, req;
  logic signed [31:0] d_in;
  logic               done_avg, done_sum, done_max;
  logic signed [63:0] out_avg, out_sum, out_max;
  logic               v_avg, v_sum, v_max;

  sliding_window #(.W(32), .ACC_W(64), .BUCKETS(B), .BUCKET_PERIOD(P), .AGG(AGG_AVG)) u_avg (
    .clk, .rst_n, .ts, .evict, .upd, .d_in, .req, .done(done_avg), .d_out(out_avg), .d_out_valid(v_avg));
  sliding_window #(.W(32), .ACC_W(64), .BUCKETS(B), .BUCKET_PERIOD(P), .AGG(AGG_SUM)) u_sum (
    .clk, .rst_n, .ts, .evict, .upd, .d_in, .req, .done(done_sum), .d_out(out_sum), .d_out_valid(v_sum));
  sliding_window #(.W(32), .ACC_W(64), .BUCKETS(B), .BUCKET_PERIOD(P), .AGG(AGG_MAX)) u_max (
    .clk, .rst_n, .ts, .evict, .upd, .d_in, .req, .done(done_max), .d_out(out_max), .d_out_valid(v_max));

  int checks = 0, failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference history
  longint hist_ts [$];
  int     hist_v  [$];

  // Phase 1 for time t: evict until done; returns the number of shift cycles.
  task automatic do_evict(input longint t, output int shifts);
    shifts = 0;
    ts = t;
    evict = 1'b1;
    #1;
    while (!done_sum) begin
      @(posedge clk); #1;
      shifts++;
    end
    evict = 1'b0;
  endtask

  task automatic add_value(input longint t, input int v);
    int s;
    do_evict(t, s);
    d_in = v; upd = 1'b1;
    @(posedge clk); #1;
    upd = 1'b0;
    hist_ts.push_back(t);
    hist_v.push_back(v);
  endtask

  task automatic read(input longint t, output int shifts);
    do_evict(t, shifts);
    req = 1'b1;
    @(posedge clk); #1;
    req = 1'b0;
  endtask

  task automatic compare_with_ref(input longint t);
    longint sum = 0; int cnt = 0; longint mx = 0;
    for (int k = 0; k < hist_ts.size(); k++) begin
      if (hist_ts[k] > t - B * P && hist_ts[k] <= t) begin
        sum += hist_v[k];
        if (cnt == 0 || hist_v[k] > mx) mx = hist_v[k];
        cnt++;
      end
    end
    if (t < B * P) begin
      check(!v_sum && !v_avg && !v_max, $sformatf("t=%0d: window must not be valid yet", t));
    end else begin
      check(v_sum && out_sum == sum, $sformatf("t=%0d sum %0d expected %0d", t, out_sum, sum));
      check(v_avg == (cnt != 0) && (cnt == 0 || out_avg == sum / cnt),
            $sformatf("t=%0d avg %0d expected %0d (cnt %0d)", t, out_avg, (cnt != 0) ? sum / cnt : 0, cnt));
      check(v_max == (cnt != 0) && (cnt == 0 || out_max == mx),
            $sformatf("t=%0d max %0d expected %0d", t, out_max, mx));
    end
  endtask

  initial begin
    int s;
    longint t;
    ts = 0; evict = 0; upd = 0; req = 0; d_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    // ---- Part 1: the sliding-average example
    add_value(5, 100);                // 0.5 s
    add_value(6, 101);                // 0.6 s
    read(10, s);                      // 1.0 s: default
    check(s == 0, "1.0 s: no eviction expected");
    check(!v_avg, "1.0 s: average must use the default");
    read(20, s);                      // 2.0 s: default
    check(s == 1, $sformatf("2.0 s: one eviction expected, got %0d", s));
    check(!v_avg, "2.0 s: average must use the default");
    add_value(22, 99);                // 2.2 s
    read(30, s);                      // 3.0 s
    check(v_avg && out_avg == 100, $sformatf("3.0 s: average %0d expected 100", out_avg));
    check(v_sum && out_sum == 300, $sformatf("3.0 s: sum %0d expected 300", out_sum));
    check(v_max && out_max == 101, $sformatf("3.0 s: max %0d expected 101", out_max));
    read(70, s);                      // 7.0 s: all buckets outdated
    check(s == 4, $sformatf("7.0 s: four evictions expected, got %0d", s));
    check(v_sum && out_sum == 0 && !v_avg && !v_max, "7.0 s: empty window");

    // ---- Part 2: random events, reads at bucket boundaries
    t = 70;
    for (int r = 0; r < 60; r++) begin
      int n;
      longint base;
      n = $urandom_range(0, 4);
      base = t;
      for (int e = 0; e < n; e++) begin
        t = t + $urandom_range(1, 3);
        if (t > base + P) t = base + P;
        add_value(t, $signed($urandom_range(0, 2000)) - 1000);
      end
      // next read at the following boundary, sometimes skipping some
      t = ((t / P) + 1 + $urandom_range(0, 2)) * P;
      read(t, s);
      compare_with_ref(t);
    end

    // ---- Part 3: update and read in the same cycle
    t = t + P;
    do_evict(t, s);
    d_in = 7; upd = 1'b1; req = 1'b1;
    @(posedge clk); #1;
    upd = 1'b0; req = 1'b0;
    hist_ts.push_back(t); hist_v.push_back(7);
    compare_with_ref(t);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
