// ext_interface_tb: checks the avail/din hand-over. A source writes random
// events whenever avail is clear (and sometimes tries to write while it is
// set, which must be ignored); every written event must appear on ev/ext_ts
// exactly once, valid for one hclk period, right after the next hclk tick,
// and avail must clear on that tick.
module ext_interface_tb;
  localparam int unsigned EV_W = 12, TS_W = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic hclk_en;
  logic [1:0] pc = '0;
  always_ff @(posedge clk) pc <= pc + 1'b1;
  assign hclk_en = (pc == 2'd3);

  logic                 ext_write;
  logic [TS_W+EV_W-1:0] ext_din;
  logic                 avail, valid_ev, valid_ext_ts;
  logic [EV_W-1:0]      ev;
  logic [TS_W-1:0]      ext_ts;

  ext_interface #(.EV_W(EV_W), .TS_W(TS_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [TS_W+EV_W-1:0] sent [$];
  int received = 0;
  bit wrote;

  // monitor: sample outputs once per hclk period (on the tick)
  always @(posedge clk) if (rst_n && hclk_en) begin
    if (valid_ev) begin
      logic [TS_W+EV_W-1:0] exp_d;
      check(sent.size() > 0, "event out of nothing");
      if (sent.size() > 0) begin
        exp_d = sent.pop_front();
        check({ext_ts, ev} == exp_d, $sformatf("event %h expected %h", {ext_ts, ev}, exp_d));
        check(valid_ext_ts, "valid_ext_ts must follow valid_ev");
        received++;
      end
    end else begin
      check(ev == '0 && ext_ts == '0, "outputs must be zero without an event");
    end
  end

  initial begin
    ext_write = 1'b0; ext_din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      ext_write = 1'b0;
      wrote = 1'b0;
      if ($urandom_range(0, 2) == 0) begin
        ext_din   = {$urandom(), $urandom()};
        ext_write = 1'b1;
        if (!avail) begin sent.push_back(ext_din); wrote = 1'b1; end
      end
      @(posedge clk); #1;
      if (wrote) check(avail, "avail must be set after a write");
    end
    @(negedge clk) ext_write = 1'b0;
    repeat (12) @(posedge clk);
    check(sent.size() == 0, "every written event must come out");
    check(received > 20, "enough events must pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
