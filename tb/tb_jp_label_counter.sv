// tb_jp_label_counter -- checks the dataset label generator at its default
// label width (2).
//
// Random start pulses; the label presented with each element must be 0 for the
// first dataset after reset, one more (mod 2^L) for every later dataset, and the
// same for all elements of one dataset. Wrap-around occurs many times.
module tb_jp_label_counter;

  localparam int unsigned L = 2;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic start = 1'b0;
  logic [L-1:0] label;

  jp_label_counter dut (.clk, .rst, .start, .label);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ref_lab = -1;

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      start = (i == 0) || ($urandom_range(4) == 0);
      if (start) ref_lab = (ref_lab + 1) % (1 << L);
      #1;
      checks++;
      if (int'(label) != ref_lab) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d label %0d expected %0d", i, label, ref_lab);
      end
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
