// in_stream_tb: a stream with DEPTH 3 (offsets 0, -1, -2) and one with
// DEPTH 1 against a reference history: after every update the newest entry
// holds the new value, older ones hold earlier values, never-written entries
// are invalid, and nothing changes without upd.
module in_stream_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        upd, done3, done1;
  logic [7:0]  d_in;
  logic [2:0][8:0] q3;
  logic [0:0][8:0] q1;

  in_stream #(.W(8), .DEPTH(3)) u3 (.clk, .rst_n, .upd, .d_in, .done(done3), .d_out(q3));
  in_stream #(.W(8), .DEPTH(1)) u1 (.clk, .rst_n, .upd, .d_in, .done(done1), .d_out(q1));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [7:0] hist [$];
    upd = 0; d_in = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 200; c++) begin
      upd = $urandom_range(0, 1); d_in = 8'($urandom());
      #1;
      check(done3 == upd && done1 == upd, "done follows upd");
      for (int n = 0; n < 3; n++) begin
        int age;
        age = 2 - n;   // entry n holds offset -(2-n)
        if (hist.size() > age) check(q3[n] == {hist[hist.size()-1-age], 1'b1}, $sformatf("entry %0d", n));
        else                   check(q3[n][0] == 1'b0, $sformatf("entry %0d must be invalid", n));
      end
      if (hist.size() > 0) check(q1[0] == {hist[hist.size()-1], 1'b1}, "depth-1 entry");
      @(negedge clk);
      if (upd) hist.push_back(d_in);
    end
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
