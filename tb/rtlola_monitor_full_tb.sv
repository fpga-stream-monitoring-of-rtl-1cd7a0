// rtlola_monitor_full_tb: the monitor exactly as configured by default
// (online mode, 100 MHz system clock, prescaler 4, eight-entry queue) taken
// through one complete hyper-period of the network specification: a little
// over one second of monitored time, 10^8 clock cycles.
//   0 .. 0.5 s    sparse random traffic, FIN-heavy, so that closed
//                 connections overtake opened ones (trigger 0);
//   0.6 s         a burst of 10 100 packets to the server, one every
//                 16 cycles, each 1400 bytes long;
//   around 1 s    one write per prescaler period across the deadline;
//   1 s deadline  many_conn sees more than 10 000 packets in the last half
//                 second (trigger 1), workload more than 10^7 bytes in the
//                 last second (trigger 2).
// Every report is checked against the reference model in net_ref_pkg.
module rtlola_monitor_full_tb;
  import rtlola_pkg::*;
  import net_ref_pkg::*;

  localparam longint unsigned CYC_PER_S = NS_PER_S / CLK_PERIOD_NS;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 ext_write, ext_avail, report, hold, buf_overflow;
  logic [TS_W+EV_W-1:0] ext_din;
  logic [N_TRIG-1:0]    trig;
  logic [TS_W-1:0]      eval_ts;
  logic [N_OUT-1:0]     eval_aff, out_valid;
  logic signed [63:0]   out_val [N_OUT];
  logic [15:0]          q_drops;

  rtlola_monitor dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  longint unsigned cyc = 0;
  always @(posedge clk) if (rst_n) cyc++;

  scoreboard sb = new("full", 0);
  initial sb.same_window = 4 * CLK_PERIOD_NS;

  always @(posedge clk) if (rst_n && report)
    sb.report(trig, eval_ts, eval_aff, out_val, out_valid);

  task automatic send(net_event_t ev);
    @(negedge clk iff !ext_avail);
    ext_din = {64'd0, ev};
    ext_write = 1;
    sb.sent(ev, (cyc > 0 ? cyc - 1 : 0) * CLK_PERIOD_NS, (cyc + 12) * CLK_PERIOD_NS);
    @(negedge clk);
    ext_write = 0;
  endtask

  task automatic idle_until(longint unsigned c);
    if (cyc < c) repeat (c - cyc) @(negedge clk);
  endtask

  initial begin
    ext_write = 0; ext_din = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    while (cyc < CYC_PER_S / 2) begin
      send(rand_event(60, 10, 40));
      repeat ($urandom_range(50_000, 150_000)) @(negedge clk);
    end
    idle_until(6 * CYC_PER_S / 10);
    for (int i = 0; i < 10_100; i++) begin
      send(server_packet(1'($urandom_range(0, 1)), 1400));
      repeat (12) @(negedge clk);
    end
    idle_until(CYC_PER_S - 14);
    repeat (7) send(rand_event(60, 30, 30));
    idle_until(CYC_PER_S + 1000);
    sb.summary();
    check(sb.pending() == 0, "every event reported");
    check(sb.n_dl == 1, $sformatf("%0d deadline evaluations", sb.n_dl));
    check(q_drops == 0, "no queue drops");
    check(sb.n_same_period > 0, "event and deadline in one prescaler period");
    for (int t = 0; t < N_TRIG; t++)
      check(sb.n_trig[t] > 0, $sformatf("trigger %0d", t));
    checks += sb.checks;
    failures += sb.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (CYC_PER_S + 2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb.checks, failures + sb.failures);
    $finish;
  end
endmodule
