// prescaler_tb: checks the clock-enable pattern of the prescaler for
// DIV = 4 (default) and DIV = 6: hclk_en exactly once every DIV cycles,
// qclk_en exactly twice per hclk period, the odd tick on hclk_en and the even
// tick half a period earlier.
module prescaler_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic h4, q4, o4, h6, q6, o6;
  prescaler             u4 (.clk, .rst_n, .hclk_en(h4), .qclk_en(q4), .q_odd(o4));
  prescaler #(.DIV(6))  u6 (.clk, .rst_n, .hclk_en(h6), .qclk_en(q6), .q_odd(o6));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int c = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (c = 0; c < 120; c++) begin
      @(negedge clk);
      // the counter leaves reset at 0 and counts from the first edge: cycle c has phase (c+1) mod DIV
      check(h4 == (((c+1) % 4) == 3), $sformatf("DIV4 hclk_en at %0d", c));
      check(q4 == (((c+1) % 4) == 3 || ((c+1) % 4) == 1), $sformatf("DIV4 qclk_en at %0d", c));
      check(!q4 || (o4 == h4), $sformatf("DIV4 q_odd at %0d", c));
      check(h6 == (((c+1) % 6) == 5), $sformatf("DIV6 hclk_en at %0d", c));
      check(q6 == (((c+1) % 6) == 5 || ((c+1) % 6) == 2), $sformatf("DIV6 qclk_en at %0d", c));
      check(!q6 || (o6 == h6), $sformatf("DIV6 q_odd at %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
