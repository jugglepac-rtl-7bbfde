// tb_jugglepac_label_widths -- runs the accumulator in the label-width
// configurations of the published evaluation other than the default L = 2:
// L = 1, 3 and 4, each with adder latency 14, fed with back-to-back datasets at
// this design's minimum length for that width (see tb_jp_stream). All sums must
// be exact and labelled correctly. A fourth instance runs L = 4 with datasets
// of 19 to 25 elements, the length the published analysis gives for keeping
// results in input order: there no sum may overtake an older one. The default
// configuration (L = 2) is covered by tb_jugglepac.
module tb_jugglepac_label_widths;

  logic clk = 1'b0;
  logic rst = 1'b1;

  always #5 clk = ~clk;

  logic d1, d3, d4, d19;
  int   c1, c3, c4, c19, f1, f3, f4, f19, o1, o3, o4, o19;

  tb_jp_stream #(.P(14), .L(1), .NSETS(30), .EXTRA(20)) u_l1 (.clk, .rst, .done(d1), .checks(c1), .failures(f1), .overtakes(o1));
  tb_jp_stream #(.P(14), .L(3), .NSETS(80), .EXTRA(6))  u_l3 (.clk, .rst, .done(d3), .checks(c3), .failures(f3), .overtakes(o3));
  tb_jp_stream #(.P(14), .L(4), .NSETS(120), .EXTRA(3)) u_l4 (.clk, .rst, .done(d4), .checks(c4), .failures(f4), .overtakes(o4));
  tb_jp_stream #(.P(14), .L(4), .NSETS(80), .EXTRA(6), .LEN(19)) u_l4_19 (.clk, .rst, .done(d19), .checks(c19), .failures(f19), .overtakes(o19));

  int checks, failures;

  initial begin
    repeat (4) @(negedge clk);
    rst = 1'b0;
    wait (d1 && d3 && d4 && d19);
    checks   = c1 + c3 + c4 + c19 + 1;
    failures = f1 + f3 + f4 + f19;
    if (o19 != 0) begin
      failures++;
      $display("FAIL: %0d sums overtaken at L = 4 with datasets of 19 or more", o19);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c3 + c4 + c19, f1 + f3 + f4 + f19 + 1);
    $finish;
  end

endmodule
