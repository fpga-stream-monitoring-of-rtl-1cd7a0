// out_stream_tb: a DEPTH 2 output stream (offset -1 looked up) against a
// reference: pseudo-extension shifts the history and leaves an invalid
// pseudo value as the newest entry; evaluation fills it, valid; the entry
// before stays the previous value during evaluation. Random sequences with
// and without evaluation after a pseudo-extension.
module out_stream_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        pe, eval, done;
  logic [15:0] value;
  logic [1:0][16:0] q;

  out_stream #(.W(16), .DEPTH(2)) dut (.clk, .rst_n, .pe, .eval, .value, .done, .d_out(q));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [16:0] m [2];
    m[0] = '0; m[1] = '0;
    pe = 0; eval = 0; value = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 300; c++) begin
      int op;
      op = $urandom_range(0, 2);
      pe = (op == 1); eval = (op == 2); value = 16'($urandom());
      #1;
      check(done == (pe || eval), "done");
      check(q[0] == m[0] && q[1] == m[1], $sformatf("cycle %0d: %h %h expected %h %h", c, q[1], q[0], m[1], m[0]));
      @(negedge clk);
      if (pe) begin m[0] = m[1]; m[1] = '0; end
      else if (eval) m[1] = {value, 1'b1};
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
