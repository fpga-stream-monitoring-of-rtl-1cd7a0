// event_queue_tb: random pushes and pops (pops only when not empty, as the
// low-level controller does) against a reference queue: head data, empty,
// full and the count of pushes dropped at a full queue.
module event_queue_tb;
  localparam int unsigned W = 16, DEPTH = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         push, pop, empty, full;
  logic [W-1:0] din, dout;
  logic [15:0]  drops;

  event_queue #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [W-1:0] model [$];
    int ndrop = 0;
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 1000; c++) begin
      bit fast_in;
      fast_in = (c % 200) < 100;
      push = fast_in ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      din  = W'($urandom());
      pop  = !empty && (fast_in ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0));
      #1;
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == DEPTH), "full");
      check(drops == 16'(ndrop), "drop count");
      if (model.size() > 0) check(dout == model[0], $sformatf("head %h expected %h", dout, model[0]));
      @(negedge clk);
      if (pop) void'(model.pop_front());
      if (push) begin
        if (model.size() < DEPTH) model.push_back(din);
        else ndrop++;
      end
    end
    check(ndrop > 0, "the test must fill the queue");
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
