// tb_jp_fp_adder -- checks the pipelined binary64 adder at its default latency
// (14) against the simulator's own IEEE double addition.
//
// Drives one new operand pair every cycle (random bit patterns, numbers of
// nearby magnitude that cancel, subnormals, zeros of both signs, infinities,
// NaNs) and compares each result LATENCY cycles later bit for bit; a NaN result
// only has to be a NaN. A result that appears one cycle early or late fails, so
// the latency is checked with every operation.
module tb_jp_fp_adder;
  import jp_pkg::*;

  localparam int unsigned LATENCY = 14;
  localparam int          N       = 20000;

  logic clk = 1'b0;
  fp_t  a, b, sum;

  jp_fp_adder dut (.clk, .a, .b, .sum);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  fp_t exp_q[$];

  function automatic fp_t rand_fp(int kind);
    fp_t v;
    v = {$urandom, $urandom};
    case (kind)
      0: ;                                            // any pattern
      1: v[62:52] = 11'(1000 + $urandom_range(46));   // moderate exponents
      2: v[62:52] = '0;                               // subnormal / zero
      3: v[62:52] = 11'($urandom_range(3));           // around the subnormal boundary
      4: v[62:52] = 11'(2040 + $urandom_range(6));    // near overflow
      5: v = $urandom_range(1) ? 64'h7FF0_0000_0000_0000 : 64'hFFF0_0000_0000_0000;
      6: v = {$urandom_range(1) == 1, 63'd0};         // +-0
      default: ;
    endcase
    return v;
  endfunction

  function automatic bit is_nan(fp_t v);
    return (v[62:52] == 11'h7FF) && (v[51:0] != '0);
  endfunction

  initial begin
    a = '0; b = '0;
    for (int i = 0; i < N + int'(LATENCY) + 2; i++) begin
      @(negedge clk);
      // Compare the result of the pair applied LATENCY cycles ago.
      if (i >= int'(LATENCY) && exp_q.size() > 0) begin
        fp_t e;
        e = exp_q.pop_front();
        checks++;
        if (is_nan(e) ? !is_nan(sum) : (sum !== e)) begin
          failures++;
          if (failures < 10) $display("FAIL: got %h expected %h", sum, e);
        end
      end
      if (i < N) begin
        int ka, kb;
        ka = $urandom_range(6); kb = $urandom_range(6);
        if (ka >= 5 && $urandom_range(3) != 0) ka = 1;
        if (kb >= 5 && $urandom_range(3) != 0) kb = 1;
        a = rand_fp(ka);
        b = rand_fp(kb);
        if ($urandom_range(3) == 0) begin
          // nearby magnitude, opposite sign: massive cancellation
          b = a ^ 64'h8000_0000_0000_0000;
          b[10:0] = 11'($urandom);
          if ($urandom_range(1) == 1) b[62:52] = b[62:52] - 11'd1;
        end
        if (is_nan(a) || is_nan(b)) exp_q.push_back(FP_QNAN);
        else exp_q.push_back($realtobits($bitstoreal(a) + $bitstoreal(b)));
      end else begin
        a = '0; b = '0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
