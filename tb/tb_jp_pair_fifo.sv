// tb_jp_pair_fifo -- checks the pair FIFO at its default depth (4).
//
// Random pushes and pops, never pushing into a full FIFO unless popping in the
// same cycle (the accumulator never does either). Head, empty/full flags and
// occupancy are compared with a queue model every cycle; the FIFO is driven to
// full and to empty many times.
module tb_jp_pair_fifo;

  localparam int unsigned DEPTH = 4;
  localparam int unsigned W     = 130;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic push = 1'b0, pop = 1'b0;
  logic [W-1:0] din = '0, dout;
  logic not_empty, full, overflow;
  logic [$clog2(DEPTH+1)-1:0] count;

  jp_pair_fifo dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_full = 0;
  logic [W-1:0] q [$];

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 6000; i++) begin
      int bias;
      bias = (i / 300) % 2;       // phases that fill and phases that drain
      pop  = (q.size() > 0) && ($urandom_range(9) < (bias ? 7 : 3));
      push = ($urandom_range(9) < (bias ? 3 : 7)) && (q.size() < DEPTH || pop);
      din  = {$urandom, $urandom, $urandom, $urandom, $urandom};
      #1;
      checks++;
      if (not_empty !== (q.size() > 0) || full !== (q.size() == DEPTH) ||
          int'(count) != q.size() || overflow ||
          (q.size() > 0 && dout !== q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d count %0d model %0d", i, count, q.size());
      end
      if (q.size() == DEPTH) n_full++;
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
      @(negedge clk);
    end
    checks++;
    if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (7000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
