// hlq_interface_tb: a small specification with two inputs (3-bit values, one
// presence bit each: event = {a, a_v, b, b_v}), three outputs and two
// deadlines. dep(a) = {0,1}, dep(b) = {1,2}; deadline 0 targets output 2,
// deadline 1 outputs 0 and 2. Random events and deadlines, often in the same
// hclk period; the entries pushed must be the event first (even tick) and the
// deadline second (odd tick), with the affected masks computed independently.
// A second instance with DL_FIRST set must push the same entries with the
// deadline of each period ahead of its event.
module hlq_interface_tb;
  localparam int unsigned EV_W = 8, TS_W = 8, N_IN = 2, N_OUT = 3, NUM_DL = 2;
  localparam int unsigned     POS [N_IN]   = '{4, 0};
  localparam logic [2:0]      DEPS [N_IN]  = '{3'b011, 3'b110};
  localparam logic [2:0]      TGT [NUM_DL] = '{3'b100, 3'b101};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic hclk_en, qclk_en, q_odd;
  prescaler u_pre (.clk, .rst_n, .hclk_en, .qclk_en, .q_odd);

  logic [TS_W-1:0] tev_ts, dl_ts;
  logic [EV_W-1:0] tev_ev;
  logic            valid_tev, dl_valid, push;
  logic [NUM_DL-1:0] dl_did;
  logic [EV_W+TS_W+N_OUT-1:0] data;

  hlq_interface #(.EV_W(EV_W), .TS_W(TS_W), .N_IN(N_IN), .N_OUT(N_OUT), .NUM_DL(NUM_DL),
                  .IN_VALID_POS(POS), .DEP(DEPS), .DL_TARGET(TGT)) dut (.*);

  logic                       push2;
  logic [EV_W+TS_W+N_OUT-1:0] data2;
  hlq_interface #(.EV_W(EV_W), .TS_W(TS_W), .N_IN(N_IN), .N_OUT(N_OUT), .NUM_DL(NUM_DL),
                  .IN_VALID_POS(POS), .DEP(DEPS), .DL_TARGET(TGT), .DL_FIRST(1'b1)) dut2 (
    .clk, .rst_n, .qclk_en, .q_odd, .tev_ts, .tev_ev, .valid_tev, .dl_ts, .dl_did, .dl_valid,
    .push(push2), .data(data2));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [EV_W+TS_W+N_OUT-1:0] expq [$], expq2 [$];
  int both = 0;

  always @(posedge clk) if (rst_n && push) begin
    check(expq.size() > 0, "unexpected push");
    if (expq.size() > 0) begin
      logic [EV_W+TS_W+N_OUT-1:0] e;
      e = expq.pop_front();
      check(data == e, $sformatf("entry %h expected %h", data, e));
    end
  end

  always @(posedge clk) if (rst_n && push2) begin
    check(expq2.size() > 0, "unexpected push (deadline first)");
    if (expq2.size() > 0) begin
      logic [EV_W+TS_W+N_OUT-1:0] e;
      e = expq2.pop_front();
      check(data2 == e, $sformatf("deadline-first entry %h expected %h", data2, e));
    end
  end

  initial begin
    tev_ts = 0; tev_ev = 0; valid_tev = 0; dl_ts = 0; dl_did = 0; dl_valid = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int p = 0; p < 100; p++) begin
      // new values right after an hclk tick, stable for one hclk period
      @(posedge clk iff hclk_en); #1;
      tev_ts = TS_W'($urandom()); tev_ev = EV_W'($urandom()); valid_tev = $urandom_range(0, 1);
      dl_ts = TS_W'($urandom()); dl_valid = $urandom_range(0, 1);
      dl_did = $urandom_range(0, 1) ? 2'b10 : 2'b01;
      if (valid_tev) begin
        logic [2:0] m;
        m = (tev_ev[4] ? 3'b011 : 3'b000) | (tev_ev[0] ? 3'b110 : 3'b000);
        expq.push_back({tev_ev, tev_ts, m});
      end
      if (dl_valid) begin
        expq.push_back({8'h00, dl_ts, dl_did[1] ? 3'b100 : 3'b101});
        expq2.push_back({8'h00, dl_ts, dl_did[1] ? 3'b100 : 3'b101});
      end
      if (valid_tev) expq2.push_back(expq[expq.size() - 1 - (dl_valid ? 1 : 0)]);
      if (valid_tev && dl_valid) both++;
    end
    @(posedge clk iff hclk_en); #1;
    valid_tev = 0; dl_valid = 0;
    repeat (8) @(posedge clk);
    check(expq.size() == 0 && expq2.size() == 0, "all entries pushed");
    check(both > 10, "event and deadline in the same period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
