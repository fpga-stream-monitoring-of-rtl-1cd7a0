// event_delay_tb: online the event must pass without delay, stamped with
// the time sampled at the last hclk tick (here every cycle is a tick);
// offline every event offered while hold is low must come out exactly once,
// one hclk tick later, with its time stamp, and nothing may come out of an
// event offered while hold is high.
module event_delay_tb;
  import rtlola_pkg::*;
  localparam int unsigned EV_W = 10, TS_W = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [TS_W-1:0] its, ts_on, ts_off;
  logic [EV_W-1:0] ev, ev_on, ev_off;
  logic            valid_ev, hold, v_on, v_off;

  event_delay #(.MODE(MODE_ONLINE),  .EV_W(EV_W), .TS_W(TS_W)) u_on (
    .clk, .rst_n, .hclk_en(1'b1), .its, .ev, .valid_ev, .hold(1'b0),
    .tev_ts(ts_on), .tev_ev(ev_on), .valid_tev(v_on));
  event_delay #(.MODE(MODE_OFFLINE), .EV_W(EV_W), .TS_W(TS_W)) u_off (
    .clk, .rst_n, .hclk_en(1'b1), .its, .ev, .valid_ev, .hold,
    .tev_ts(ts_off), .tev_ev(ev_off), .valid_tev(v_off));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    bit exp_v;
    logic [TS_W-1:0] its_prev;
    logic [TS_W+EV_W-1:0] exp_d;
    int outs = 0;
    its = 0; ev = 0; valid_ev = 0; hold = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    exp_v = 0; exp_d = '0; its_prev = 0;
    for (int c = 0; c < 300; c++) begin
      its = its + 16'($urandom_range(1, 5));
      ev = EV_W'($urandom());
      valid_ev = $urandom_range(0, 1);
      hold = ($urandom_range(0, 3) == 0);
      #1;
      check(v_on == valid_ev && ts_on == its_prev && ev_on == ev, "online pass-through");
      check(v_off == exp_v, $sformatf("offline valid %0b expected %0b at %0d", v_off, exp_v, c));
      if (exp_v) check({ts_off, ev_off} == exp_d, "offline data");
      if (v_off) outs++;
      @(negedge clk);
      exp_v = valid_ev && !hold;
      exp_d = {its, ev};
      its_prev = its;
    end
    check(outs > 50, "enough offline events");
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
