// tb_jp_pair_identifier -- checks pairing of returning subsums by label
// (default label width 2, four registers).
//
// Feeds random labelled values, with idle cycles. The reference keeps, per
// label, at most one waiting value: a value whose label has one waiting must
// produce a pair (waiting value first, new value second, same label) in the same
// cycle; otherwise no pair may be produced and the value must wait.
module tb_jp_pair_identifier;
  import jp_pkg::*;

  localparam int unsigned L = 2;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic in_valid = 1'b0;
  logic [L-1:0] in_label = '0;
  fp_t  in_value = '0;
  logic pair_valid;
  logic [L-1:0] pair_label;
  fp_t  pair_a, pair_b;

  jp_pair_identifier dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_pairs = 0;
  bit  w_valid [1 << L];
  fp_t w_value [1 << L];

  initial begin
    foreach (w_valid[i]) w_valid[i] = 1'b0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 5000; i++) begin
      in_valid = ($urandom_range(4) != 0);
      in_label = L'($urandom);
      in_value = {$urandom, $urandom};
      #1;
      checks++;
      if (in_valid && w_valid[in_label]) begin
        n_pairs++;
        if (!pair_valid || pair_label != in_label || pair_a !== w_value[in_label] || pair_b !== in_value) begin
          failures++;
          if (failures < 10) $display("FAIL: cycle %0d missing/wrong pair", i);
        end
        w_valid[in_label] = 1'b0;
      end else begin
        if (pair_valid) begin
          failures++;
          if (failures < 10) $display("FAIL: cycle %0d spurious pair", i);
        end
        if (in_valid) begin
          w_valid[in_label] = 1'b1;
          w_value[in_label] = in_value;
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_pairs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
