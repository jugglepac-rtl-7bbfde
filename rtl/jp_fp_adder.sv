// jp_fp_adder -- pipelined binary64 floating-point adder, the single arithmetic
// unit of the JugglePAC accumulator.
//
// Accepts one addition per clock and returns a + b exactly LATENCY cycles later
// (p in the accumulator's equations). The adder has no valid signal: it adds
// whatever is on its inputs every cycle, and the accumulator tracks which
// results mean something in a shift register of the same length.
//
// Timing: operands sampled at edge k appear on `sum` after edge k+LATENCY-1,
// i.e. `sum` is registered and changes LATENCY edges after the operands were
// presented. LATENCY >= 1.
//
// The accumulator's own analysis only states that the adder is pipelined with
// latency p; the numbers it reports imply p = 14, which is the default. How the
// adder is built inside is this design's choice: the addition is computed in the
// first stage (jp_pkg::fp_add, round to nearest even, subnormals kept) and the
// remaining LATENCY-1 stages are plain registers that a synthesis tool with
// register retiming can spread through the logic.
module jp_fp_adder
  import jp_pkg::*;
#(
  parameter int unsigned LATENCY = 14
) (
  input  logic clk,
  input  fp_t  a,
  input  fp_t  b,
  output fp_t  sum
);

  fp_t stage [LATENCY];

  always_ff @(posedge clk) begin
    stage[0] <= fp_add(a, b);
    for (int i = 1; i < int'(LATENCY); i++) stage[i] <= stage[i-1];
  end

  assign sum = stage[LATENCY-1];

endmodule
