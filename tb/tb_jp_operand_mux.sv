// tb_jp_operand_mux -- checks operand selection and the register in front of
// the adder (default label width 2).
//
// The testbench plays state machine, label counter and FIFO: it drives `st`,
// `odd_hold` and `label` from its own models of those blocks, a random input
// stream (random dataset starts, 20 % invalid cycles) and a random FIFO head.
// Its model of the held element predicts, for every cycle, the addition that
// must appear on the `iss_*` register one cycle later: in state 1 the held
// element plus the current one (plus 0 at an odd-length hand-over), with the
// first-addition marker on the first pair of each dataset; in state 0 the FIFO
// head, popped; nothing before the first dataset.
module tb_jp_operand_mux;
  import jp_pkg::*;

  localparam int unsigned L = 2;

  logic clk = 1'b0;
  logic rst = 1'b1;
  fp_t  in = '0;
  logic valid = 1'b0, start = 1'b0;
  logic [L-1:0] label = '0;
  logic st = 1'b0, odd_hold = 1'b0;
  logic fifo_valid = 1'b0;
  logic [L-1:0] fifo_label = '0;
  fp_t  fifo_a = '0, fifo_b = '0;
  logic fifo_pop;
  logic iss_valid, iss_st, iss_first;
  logic [L-1:0] iss_label;
  fp_t  iss_a, iss_b;

  jp_operand_mux dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pad = 0, n_first = 0, n_fifo = 0, n_zero = 0;

  // reference state
  bit   r_st = 0, r_live = 0, r_first = 0, r_active = 0;
  fp_t  r_val = '0;
  int   r_lab = 0, lab_q = 3;

  initial begin
    bit   e_valid, e_first, e_pop;
    int   e_lab;
    fp_t  e_a, e_b, cur;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 8000; i++) begin
      // stimulus
      start = (i > 5) && ($urandom_range(29) == 0);
      valid = start || ($urandom_range(4) != 0);
      in    = {$urandom, $urandom};
      fifo_valid = $urandom_range(1);
      fifo_label = L'($urandom);
      fifo_a = {$urandom, $urandom};
      fifo_b = {$urandom, $urandom};
      if (start) lab_q = (lab_q + 1) % (1 << L);
      label    = L'(lab_q);
      st       = r_st;
      odd_hold = r_st && start;
      cur = valid ? in : '0;
      if (!valid && r_active) n_zero++;
      // expected issue
      e_valid = 0; e_first = 0; e_pop = 0; e_lab = 0; e_a = '0; e_b = '0;
      if (r_st) begin
        if (r_live) begin
          e_valid = 1; e_first = r_first; e_lab = r_lab; e_a = r_val;
          e_b = start ? '0 : cur;
          if (start) n_pad++;
          if (r_first) n_first++;
        end
      end else if (fifo_valid) begin
        e_valid = 1; e_pop = 1; e_lab = int'(fifo_label); e_a = fifo_a; e_b = fifo_b;
        n_fifo++;
      end
      #1;
      checks++;
      if (fifo_pop !== e_pop) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d fifo_pop %b expected %b", i, fifo_pop, e_pop);
      end
      @(posedge clk); #1;
      checks++;
      if (iss_valid !== e_valid ||
          (e_valid && (iss_st !== r_st || iss_first !== e_first || int'(iss_label) != e_lab ||
                       iss_a !== e_a || iss_b !== e_b))) begin
        failures++;
        if (failures < 10)
          $display("FAIL: cycle %0d issue v%b st%b f%b l%0d expected v%b st%b f%b l%0d",
                   i, iss_valid, iss_st, iss_first, iss_label, e_valid, r_st, e_first, e_lab);
      end
      // reference update
      if (!r_st || start) begin
        r_val = cur; r_lab = lab_q; r_live = r_active || start;
      end else begin
        r_live = 0;
      end
      if (start) r_first = 1;
      else if (r_st && e_valid) r_first = 0;
      if (start) r_active = 1;
      r_st = r_st ? start : 1'b1;
      @(negedge clk);
    end
    checks++;
    if (n_pad == 0 || n_first == 0 || n_fifo == 0 || n_zero == 0) begin
      failures++;
      $display("FAIL: a case never occurred: pad %0d first %0d fifo %0d zero %0d", n_pad, n_first, n_fifo, n_zero);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (9000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
