// scheduler_tb: the paper's example schedule, streams at 2 Hz and 5 Hz
// (time unit 0.1 s): hyper-period 10, deadlines at offsets 2, 4, 5, 6, 8, 10.
// Online instance: its counts up by one per hclk tick from 0; every deadline
// must be emitted exactly once, in order, one tick after it became due, with
// the right one-hot id and nominal time stamp, and hold must stay low.
// Offline instance: the first event (3.4 s) starts the hyper-period; later
// events skip several deadlines; each must be held for exactly as many ticks
// as deadlines became due, and the deadline sequence must match the
// reference (period 3.4 s + k * 1 s + offset).
module scheduler_tb;
  import rtlola_pkg::*;

  localparam int unsigned N = 6;
  localparam logic [63:0] OFFS [N] = '{64'd2, 64'd4, 64'd5, 64'd6, 64'd8, 64'd10};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [63:0] its_on, its_off;
  logic        v_off;
  logic        hold_on, hold_off, dv_on, dv_off;
  logic [N-1:0] did_on, did_off;
  logic [63:0] dts_on, dts_off;

  scheduler #(.MODE(MODE_ONLINE), .NUM_DL(N), .HYPER_PERIOD(10), .DL_OFFSET(OFFS)) u_on (
    .clk, .rst_n, .hclk_en(1'b1), .its(its_on), .valid_its(1'b1),
    .hold(hold_on), .dl_valid(dv_on), .dl_did(did_on), .dl_ts(dts_on));
  scheduler #(.MODE(MODE_OFFLINE), .NUM_DL(N), .HYPER_PERIOD(10), .DL_OFFSET(OFFS)) u_off (
    .clk, .rst_n, .hclk_en(1'b1), .its(its_off), .valid_its(v_off),
    .hold(hold_off), .dl_valid(dv_off), .dl_did(did_off), .dl_ts(dts_off));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected k-th deadline after a start time
  function automatic longint exp_ts(longint start, int k);
    return start + (k / N) * 10 + longint'(OFFS[k % N]);
  endfunction

  // ---------------- online
  int k_on = 0;
  logic [63:0] its_prev;
  always @(posedge clk) if (rst_n) begin
    check(!hold_on, "online: hold must stay low");
    if (dv_on) begin
      check(dts_on == 64'(exp_ts(0, k_on)), $sformatf("online deadline %0d: ts %0d expected %0d", k_on, dts_on, exp_ts(0, k_on)));
      check(did_on == N'(1) << (N - 1 - (k_on % N)), $sformatf("online deadline %0d: id %b", k_on, did_on));
      // emitted on the tick after the one where its reached the deadline
      check(its_prev == dts_on, $sformatf("online deadline %0d late: its %0d", k_on, its_prev));
      k_on++;
    end
  end

  initial begin
    its_on = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    forever begin
      @(posedge clk);
      its_prev <= its_on;
      its_on   <= its_on + 1;
    end
  end

  // ---------------- offline
  int k_off = 0;
  always @(posedge clk) if (rst_n && dv_off) begin
    check(dts_off == 64'(exp_ts(34, k_off)), $sformatf("offline deadline %0d: ts %0d expected %0d", k_off, dts_off, exp_ts(34, k_off)));
    k_off++;
  end

  initial begin
    longint evs [6] = '{34, 35, 41, 43, 55, 56};
    int held, due_before, due_after;
    its_off = 0; v_off = 0;
    wait (rst_n);
    @(negedge clk);
    for (int e = 0; e < 6; e++) begin
      repeat ($urandom_range(0, 2)) @(negedge clk);
      its_off = 64'(evs[e]); v_off = 1'b1;
      // reference: deadlines due by this event, minus those due by the previous
      due_before = 0; due_after = 0;
      if (e > 0) begin
        while (exp_ts(34, due_before) <= evs[e-1]) due_before++;
        while (exp_ts(34, due_after)  <= evs[e])   due_after++;
      end
      held = 0;
      #1;
      while (hold_off) begin
        @(negedge clk); held++;
      end
      check(held == due_after - due_before, $sformatf("event %0d held %0d ticks, expected %0d", evs[e], held, due_after - due_before));
      @(negedge clk);
      v_off = 1'b0;
    end
    repeat (3) @(negedge clk);
    check(k_off == 13, $sformatf("offline: %0d deadlines emitted, expected 13", k_off));
    check(k_on >= 10, $sformatf("online: only %0d deadlines", k_on));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
