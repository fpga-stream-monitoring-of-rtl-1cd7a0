// time_select_tb: the online instance must count CLK_PERIOD per system
// cycle from 0 after reset and always be valid; the offline instance must
// pass the external time stamp and its valid bit through without delay.
module time_select_tb;
  import rtlola_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [63:0] ext_ts, its_on, its_off;
  logic        valid_ext_ts, v_on, v_off;

  time_select #(.MODE(MODE_ONLINE),  .CLK_PERIOD(10)) u_on  (.clk, .rst_n, .ext_ts, .valid_ext_ts, .its(its_on),  .valid_its(v_on));
  time_select #(.MODE(MODE_OFFLINE), .CLK_PERIOD(10)) u_off (.clk, .rst_n, .ext_ts, .valid_ext_ts, .its(its_off), .valid_its(v_off));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    ext_ts = '0; valid_ext_ts = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 100; c++) begin
      ext_ts = {$urandom(), $urandom()};
      valid_ext_ts = $urandom_range(0, 1);
      #1;
      check(its_on == 64'(c) * 10, $sformatf("online its %0d expected %0d", its_on, c * 10));
      check(v_on, "online its always valid");
      check(its_off == ext_ts && v_off == valid_ext_ts, "offline its is the external time stamp");
      @(negedge clk);
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
