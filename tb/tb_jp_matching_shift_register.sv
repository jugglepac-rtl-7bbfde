// tb_jp_matching_shift_register -- checks the label pipeline at its default
// length (14): every tag must come out exactly 14 cycles after it went in, and
// nothing but zeros may come out in the 14 cycles after reset.
module tb_jp_matching_shift_register;

  localparam int unsigned P = 14;
  localparam int unsigned W = 4;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic [W-1:0] tag_in, tag_out;

  jp_matching_shift_register dut (.clk, .rst, .tag_in, .tag_out);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [W-1:0] hist [$];

  initial begin
    tag_in = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < int'(P) - 1; i++) hist.push_back('0);   // reset contents
    for (int i = 0; i < 3000; i++) begin
      tag_in = W'($urandom);
      hist.push_back(tag_in);
      @(posedge clk); #1;
      checks++;
      // After this edge, tag_out holds the tag sampled P-1 edges before it.
      if (tag_out !== hist[0]) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d out %h expected %h", i, tag_out, hist[0]);
      end
      void'(hist.pop_front());
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
