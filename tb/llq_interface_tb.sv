// llq_interface_tb: a reference queue feeds the interface; a stand-in for
// the evaluation controller finishes each evaluation a random number of
// cycles after een rises. Checks: pop is a single-cycle pulse only when the
// queue is not empty and only when no evaluation is running, d_in carries the
// popped entry for the whole evaluation, een is set from the cycle after pop
// until the evaluation ends, every entry is evaluated once and in order, and
// back-to-back entries go straight from eval to pop.
module llq_interface_tb;
  localparam int unsigned W = 12;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         empty, eval_done, pop, een;
  logic [W-1:0] q_out, d_in;

  llq_interface #(.W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] q [$];
  logic [W-1:0] popped [$];
  int evaluated = 0, direct = 0;

  assign empty = (q.size() == 0);
  assign q_out = empty ? '0 : q[0];

  // producer
  initial begin
    wait (rst_n);
    repeat (300) begin
      @(negedge clk);
      if ($urandom_range(0, 5) == 0) q.push_back(W'($urandom()));
    end
  end

  // queue side
  always @(posedge clk) if (rst_n && pop) begin
    check(!empty, "pop on empty queue");
    check(!een, "pop during an evaluation");
    popped.push_back(q[0]);
    #1 q.pop_front();  // after the interface has sampled q_out
  end

  // evaluation controller stand-in
  initial begin
    eval_done = 0;
    wait (rst_n);
    forever begin
      int d;
      logic [W-1:0] exp_e;
      @(posedge clk iff een); #1;
      check(popped.size() > 0, "een without pop");
      exp_e = popped.pop_front();
      d = $urandom_range(1, 8);
      repeat (d) begin
        check(een && d_in == exp_e, "d_in stable while een");
        @(negedge clk);
      end
      eval_done = 1;
      @(posedge clk); #1;
      eval_done = 0;
      check(!een, "een cleared after eval_done");
      evaluated++;
      if (pop) direct++;
    end
  end

  initial begin
    int expected;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (1500) @(posedge clk);
    check(q.size() == 0, "queue drained");
    check(evaluated > 20, $sformatf("%0d evaluations", evaluated));
    check(direct > 0, "eval -> pop transition seen");
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
