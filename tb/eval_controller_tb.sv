// eval_controller_tb: three layers. For random numbers of eviction cycles
// (done1 low for k cycles) and random evaluation stalls (done2 low), checks
// the sequence start1 once, evict during the whole of state 1, then for each
// layer x one layer_req[x] cycle followed by layer_eval[x] until done2, then
// eval_done once, and that an evaluation takes 1 + (k+1) + sum of the layer
// steps cycles from een.
module eval_controller_tb;
  localparam int unsigned L = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic een, done1, done2, start1, evict, eval_done, busy;
  logic [L:1] layer_req, layer_eval;

  eval_controller #(.N_LAYERS(L)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    een = 0; done1 = 0; done2 = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int r = 0; r < 40; r++) begin
      int k, stall, cycles, expect_cycles;
      k = $urandom_range(0, 3);
      @(negedge clk);
      een = 1; done1 = 0; done2 = 1;
      cycles = 0;
      #1;
      check(!busy && !start1 && layer_req == '0 && layer_eval == '0, "idle outputs");
      @(negedge clk); cycles++;
      // state 1
      check(start1 && evict, "start1 and evict in the first cycle of state 1");
      for (int i = 0; i < k; i++) begin
        @(negedge clk); cycles++;
        check(!start1 && evict, "evict while done1 is low");
      end
      done1 = 1; #1;
      @(negedge clk); cycles++;
      done1 = 0;
      expect_cycles = 1 + k + 1;
      for (int x = 1; x <= L; x++) begin
        check(layer_req == L'(1 << (x-1)), $sformatf("layer_req for layer %0d: %b", x, layer_req));
        check(layer_eval == '0, "no eval in the window step");
        @(negedge clk); cycles++;
        stall = $urandom_range(0, 2);
        done2 = (stall == 0);
        for (int s = 0; s < stall; s++) begin
          check(layer_eval == L'(1 << (x-1)), "eval held while done2 low");
          @(negedge clk); cycles++;
          if (s == stall - 1) done2 = 1;
        end
        check(layer_eval == L'(1 << (x-1)), $sformatf("layer_eval for layer %0d", x));
        #1;
        check(eval_done == (x == L), "eval_done only after the last layer");
        @(negedge clk); cycles++;
        expect_cycles += 2 + stall;
      end
      een = 0;
      check(!busy, "back to idle");
      check(cycles == expect_cycles, $sformatf("evaluation took %0d cycles, expected %0d", cycles, expect_cycles));
    end
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
