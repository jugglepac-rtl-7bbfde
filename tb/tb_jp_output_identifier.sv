// tb_jp_output_identifier -- checks final-sum detection (default label width 2,
// adder latency 14).
//
// Drives random additions entering the adder (state 1 with and without the
// first-addition marker, state 0 only while the reference count of that label
// is above 0, as in the accumulator) and random results leaving it. The
// reference keeps one count per label; a result must be sent out exactly when
// its label's count, including an update in the same cycle, is 0, and be
// returned to the pair identifier otherwise, with value and label unchanged.
module tb_jp_output_identifier;
  import jp_pkg::*;

  localparam int unsigned L = 2;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic iss_valid = 0, iss_st = 0, iss_first = 0;
  logic [L-1:0] iss_label = '0;
  logic res_valid = 0;
  logic [L-1:0] res_label = '0;
  fp_t  res_value = '0;
  logic out_en;
  fp_t  out;
  logic [L-1:0] out_label;
  logic fb_valid;
  logic [L-1:0] fb_label;
  fp_t  fb_value;

  jp_output_identifier dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_final = 0, n_fb = 0, n_same = 0;
  int cnt [1 << L];

  initial begin
    foreach (cnt[i]) cnt[i] = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 10000; i++) begin
      int d, c;
      bit e_final;
      iss_valid = $urandom_range(1);
      iss_label = L'($urandom);
      iss_st    = $urandom_range(1);
      iss_first = iss_st && ($urandom_range(3) == 0);
      if (iss_valid && !iss_st && cnt[iss_label] == 0) iss_st = 1;   // no underflow
      res_valid = $urandom_range(1);
      res_label = L'($urandom);
      res_value = {$urandom, $urandom};
      d = 0;
      if (iss_valid &&  iss_st && !iss_first) d = 1;
      if (iss_valid && !iss_st)               d = -1;
      c = cnt[res_label] + ((iss_label == res_label) ? d : 0);
      if (iss_valid && iss_label == res_label && d != 0) n_same++;
      e_final = res_valid && (c == 0);
      #1;
      checks++;
      if (out_en !== e_final || fb_valid !== (res_valid && !e_final) ||
          out !== res_value || fb_value !== res_value ||
          out_label !== res_label || fb_label !== res_label) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d out_en %b expected %b (count %0d)", i, out_en, e_final, c);
      end
      if (e_final) n_final++;
      if (res_valid && !e_final) n_fb++;
      cnt[iss_label] += d;
      // keep counts small so that zero is reached often
      @(negedge clk);
      if ($urandom_range(2) == 0) begin
        for (int k = 0; k < (1 << L); k++) begin
          while (cnt[k] > 0) begin
            iss_valid = 1; iss_st = 0; iss_first = 0; iss_label = L'(k);
            res_valid = 0;
            cnt[k]--;
            @(negedge clk);
          end
        end
      end
    end
    checks++;
    if (n_final == 0 || n_fb == 0 || n_same == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
