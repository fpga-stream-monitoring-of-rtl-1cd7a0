// input_buffer_tb: random new events and hold against a reference queue:
// per hclk tick the head leaves when hold is low, a new event joins at the
// tail, and an event that finds the buffer full is dropped and sets the
// sticky overflow flag. Checks the head, its valid bit and overflow every
// tick, and that overflow happened at least once.
module input_buffer_tb;
  localparam int unsigned DEPTH = 4, W = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         in_valid, hold, head_valid, overflow;
  logic [W-1:0] in_data, head_data;

  input_buffer #(.DEPTH(DEPTH), .W(W)) dut (.clk, .rst_n, .hclk_en(1'b1), .in_valid, .in_data,
                                           .hold, .head_valid, .head_data, .overflow);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] model [$];
    bit ovf = 0;
    int ovf_events = 0;
    in_valid = 0; hold = 0; in_data = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 500; c++) begin
      // bursts of holds make the buffer fill up
      hold     = (c % 50 < 20) ? ($urandom_range(0, 4) != 0) : ($urandom_range(0, 3) == 0);
      in_valid = $urandom_range(0, 1);
      in_data  = W'($urandom());
      #1;
      check(head_valid == (model.size() > 0), "head valid");
      if (model.size() > 0) check(head_data == model[0], $sformatf("head %h expected %h", head_data, model[0]));
      check(overflow == ovf, "overflow flag");
      @(negedge clk);
      if (!hold && model.size() > 0) void'(model.pop_front());
      if (in_valid) begin
        if (model.size() < DEPTH) model.push_back(in_data);
        else begin ovf = 1; ovf_events++; end
      end
    end
    check(ovf_events > 0, "the test must provoke an overflow");
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
