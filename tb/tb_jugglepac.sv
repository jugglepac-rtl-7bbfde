// tb_jugglepac -- end-to-end test of the accumulator at its default parameters
// (adder latency 14, label width 2, FIFO depth 4, minimum dataset length 28).
//
// Streams back-to-back datasets, one element per clock, and checks every sum
// that comes out against a reference computed in the testbench:
//   phase 1: values k/256 with |k| < 2^20, so every partial sum is exact in
//            binary64 and the result must match bit for bit, whatever the
//            order of additions; random lengths MIN_LEN .. MIN_LEN+40 (odd and
//            even), 10 % of the cycles after a start with valid = 0;
//   phase 2: lengths exactly MIN_LEN and MIN_LEN+1 alternating (densest label
//            reuse the length rule allows);
//   phase 3: random binary64 values of mixed sign and magnitude; a sum must lie
//            within 1e-12 of the sum of magnitudes of the reference.
// Sums must come out in dataset order with the right label. The test also
// checks when the first state-0 addition happens after the first input, and
// counts how often each mechanism occurred: odd-length hand-over (extra state-1
// cycle), zero insertion, label wrap-around, FIFO depth >= 2, pairing in the
// pair identifier. A mechanism that never occurred counts as a failure. The
// largest value of the per-label addition counters is reported and checked.
module tb_jugglepac;
  import jp_pkg::*;

  localparam int unsigned P       = 14;
  localparam int unsigned L       = 2;
  localparam int unsigned MIN_LEN = min_dataset_len(P + 2, L);

  logic clk = 1'b0;
  logic rst = 1'b1;
  fp_t  in;
  logic valid, start;
  fp_t  out;
  logic out_en;
  logic [L-1:0] out_label;
  logic fifo_overflow;

  jugglepac dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;

  // Expected results, in dataset order.
  real         exp_sum[$];
  real         exp_mag[$];
  int          exp_lab[$];
  longint      exp_end[$];
  bit          exp_exact[$];

  // Mechanism counters.
  int n_odd_hold = 0, n_gap = 0, n_wrap = 0, n_fifo2 = 0, n_pairs = 0, n_out = 0;
  int max_latency = 0;
  int max_fifo = 0;
  int max_cnt = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // Monitor.
  always @(posedge clk) if (!rst) begin
    if (dut.odd_hold) n_odd_hold++;
    if (dut.pair_valid) n_pairs++;
    for (int i = 0; i < (1 << L); i++)
      if (int'(dut.u_oid.cnt[i]) > max_cnt) max_cnt = int'(dut.u_oid.cnt[i]);
    if (int'(dut.fifo_count) >= 2) n_fifo2++;
    if (int'(dut.fifo_count) > max_fifo) max_fifo = int'(dut.fifo_count);
    if (fifo_overflow) begin
      failures++;
      $display("FAIL: FIFO overflow at cycle %0d", cycle);
    end
    if (out_en) begin
      real got, e, m, tol;
      int  lab;
      longint t_end;
      bit  ex;
      n_out++;
      checks++;
      if (exp_sum.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output %h label %0d at cycle %0d", out, out_label, cycle);
      end else begin
        e = exp_sum.pop_front(); m = exp_mag.pop_front(); lab = exp_lab.pop_front();
        t_end = exp_end.pop_front(); ex = exp_exact.pop_front();
        got = $bitstoreal(out);
        if (int'(cycle - t_end) > max_latency) max_latency = int'(cycle - t_end);
        if ($test$plusargs("lat")) $display("LAT %0d lab %0d", cycle - t_end, lab);
        tol = ex ? 0.0 : 1e-12 * m;
        if (int'(out_label) != lab || (ex && out != $realtobits(e)) ||
            (!ex && ((got - e > tol) || (e - got > tol)))) begin
          failures++;
          $display("FAIL: cycle %0d got %g (%h) label %0d, expected %g label %0d",
                   cycle, got, out, out_label, e, lab);
        end
      end
    end
  end

  // First state-0 addition after the first input.
  longint first_in_cycle = -1, first_s0_cycle = -1;
  always @(posedge clk) if (!rst) begin
    if (start && first_in_cycle < 0) first_in_cycle = cycle;
    if (first_s0_cycle < 0 && !dut.st && dut.fifo_pop) first_s0_cycle = cycle;
  end

  int next_label = 0;

  // One dataset: `len` cycles starting with `start`.
  task automatic send_set(int len, int gap_pct, bit exact);
    real s = 0.0, mag = 0.0;
    for (int i = 0; i < len; i++) begin
      real v;
      bit  vl;
      int  k, e;
      @(negedge clk);
      vl = (i == 0) || ($urandom_range(99) >= gap_pct);
      if (exact) begin
        k = int'($urandom_range(2097150)) - 1048575;
        v = real'(k) / 256.0;
      end else begin
        k = int'($urandom_range(2000000)) - 1000000;
        e = int'($urandom_range(40)) - 20;
        v = real'(k) / 1000.0 * (2.0 ** e);
      end
      start = (i == 0);
      valid = vl;
      in    = vl ? $realtobits(v) : $realtobits(-123.0);  // ignored when invalid
      if (!vl) n_gap++;
      if (vl) begin
        s   = s + v;
        mag = mag + (v < 0 ? -v : v);
      end
    end
    exp_sum.push_back(s);
    exp_mag.push_back(mag);
    exp_lab.push_back(next_label);
    exp_end.push_back(cycle);
    exp_exact.push_back(exact);
    if (next_label == (1 << L) - 1) n_wrap++;
    next_label = (next_label + 1) % (1 << L);
  endtask

  initial begin
    in = '0; valid = 1'b0; start = 1'b0;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    repeat (3) @(negedge clk);
    // Phase 1: exact values, random lengths, gaps.
    for (int k = 0; k < 60; k++) send_set(MIN_LEN + $urandom_range(40), 10, 1'b1);
    // Phase 2: minimum lengths.
    for (int k = 0; k < 24; k++) send_set(MIN_LEN + (k % 2), 0, 1'b1);
    // Phase 3: general binary64 values.
    for (int k = 0; k < 40; k++) send_set(MIN_LEN + $urandom_range(60), 5, 1'b0);
    // Close the last dataset with a further start, then idle.
    @(negedge clk);
    start = 1'b1; valid = 1'b1; in = '0;
    @(negedge clk);
    start = 1'b0; valid = 1'b0;
    repeat (400) @(negedge clk);

    checks++;
    if (exp_sum.size() != 0) begin
      failures++;
      $display("FAIL: %0d sums never came out", exp_sum.size());
    end
    // Only state-1 additions until the first pair of subsums is ready:
    // P + 5 + (1 - P mod 2) cycles after the first input in this design.
    checks++;
    if (first_s0_cycle - first_in_cycle != longint'(P + 5 + (1 - P % 2))) begin
      failures++;
      $display("FAIL: first state-0 addition %0d cycles after the first input",
               first_s0_cycle - first_in_cycle);
    end
    checks++; if (n_odd_hold == 0) begin failures++; $display("FAIL: no odd-length hand-over"); end
    checks++; if (n_gap == 0)      begin failures++; $display("FAIL: no zero insertion"); end
    checks++; if (n_wrap == 0)     begin failures++; $display("FAIL: no label wrap-around"); end
    checks++; if (n_fifo2 == 0)    begin failures++; $display("FAIL: FIFO never held 2 pairs"); end
    checks++; if (n_pairs == 0)    begin failures++; $display("FAIL: no pairing"); end
    $display("outputs=%0d odd_hand_overs=%0d zero_inputs=%0d label_wraps=%0d fifo>=2 cycles=%0d max_fifo=%0d pairs=%0d",
             n_out, n_odd_hold, n_gap, n_wrap, n_fifo2, max_fifo, n_pairs);
    $display("max latency last element -> sum = %0d cycles, first state-0 addition at +%0d, max addition count %0d",
             max_latency, first_s0_cycle - first_in_cycle, max_cnt);
    // The addition counter must stay within its width (p + 4 is provisioned).
    checks++;
    if (max_cnt > int'(P) + 4 || max_cnt == 0) begin
      failures++;
      $display("FAIL: addition counter reached %0d", max_cnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
