// tb_jp_state_machine -- checks the two-state scheduler.
//
// After reset the state must be 0; it must then alternate every cycle, except
// that a start pulse seen in state 1 keeps it in state 1 for the next cycle
// (odd-length hand-over), which `odd_hold` must flag in that cycle. Start pulses
// are random, so both the odd and the even hand-over occur many times.
module tb_jp_state_machine;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic start = 1'b0;
  logic st, odd_hold;

  jp_state_machine dut (.clk, .rst, .start, .st, .odd_hold);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_odd = 0;
  bit ref_st;

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    ref_st = 1'b0;
    for (int i = 0; i < 4000; i++) begin
      start = ($urandom_range(3) == 0);
      #1;
      checks++;
      if (st !== ref_st || odd_hold !== (ref_st && start)) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d st=%b odd=%b expected st=%b", i, st, odd_hold, ref_st);
      end
      if (ref_st && start) n_odd++;
      // reference next state
      ref_st = ref_st ? start : 1'b1;
      @(negedge clk);
    end
    checks++;
    if (n_odd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
