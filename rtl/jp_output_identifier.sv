// jp_output_identifier -- decides which adder result is a dataset's final sum.
//
// A dataset of N values needs N-1 additions, but N is not known in advance. One
// up/down counter per label tracks how many subsums of that dataset exist beyond
// one: it counts up for every state-1 addition (two inputs -> one new subsum)
// except the dataset's first one, and down for every state-0 addition (two
// subsums -> one). A result that leaves the adder while its label's counter is 0
// is therefore the only subsum its dataset has left and, since the next dataset
// has started, its final sum: it is sent to the output with `out_en`. Every
// other result goes back to the pair identifier.
//
// Timing: counters are updated when an addition enters the adder (`iss_*`,
// adder-input time); the test is made when a result leaves it (`res_*`, LATENCY
// cycles later, label from the matching shift register). An update in the same
// cycle as the test is included in the tested value. `out`, `out_en`,
// `out_label` and the feedback outputs are combinational from the registered
// adder result and the counters. Synchronous reset clears all counters.
//
// Counting state-1 additions up, state-0 additions down, skipping each dataset's
// first state-1 addition, one counter per label and the compare with 0 selecting
// output or feedback follow the paper. Updating at adder input and comparing at
// adder output, and bringing the label out with the sum (the paper names this as
// the way to restore order when results overtake each other), are this design's
// choices. The counter width holds p + 4, above the paper's stated maximum p + 2.
module jp_output_identifier
  import jp_pkg::*;
#(
  parameter int unsigned L = 2,
  parameter int unsigned P = 14
) (
  input  logic         clk,
  input  logic         rst,
  // addition entering the adder
  input  logic         iss_valid,
  input  logic         iss_st,
  input  logic         iss_first,
  input  logic [L-1:0] iss_label,
  // result leaving the adder
  input  logic         res_valid,
  input  logic [L-1:0] res_label,
  input  fp_t          res_value,
  // final sums
  output logic         out_en,
  output fp_t          out,
  output logic [L-1:0] out_label,
  // subsums returned to the pair identifier
  output logic         fb_valid,
  output logic [L-1:0] fb_label,
  output fp_t          fb_value
);

  localparam int unsigned NCNT = 1 << L;
  localparam int unsigned CW   = $clog2(P + 5) + 1;

  typedef logic [CW-1:0] cnt_t;

  cnt_t cnt [NCNT];
  logic inc, dec;
  cnt_t cnt_res;
  logic is_final;

  assign inc = iss_valid &&  iss_st && !iss_first;
  assign dec = iss_valid && !iss_st;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(NCNT); i++) cnt[i] <= '0;
    end else if (inc) begin
      cnt[iss_label] <= cnt[iss_label] + 1'b1;
    end else if (dec) begin
      cnt[iss_label] <= cnt[iss_label] - 1'b1;
    end
  end

  always_comb begin
    cnt_res = cnt[res_label];
    if (iss_label == res_label) begin
      if (inc)      cnt_res = cnt_res + 1'b1;
      else if (dec) cnt_res = cnt_res - 1'b1;
    end
  end

  assign is_final  = res_valid && (cnt_res == '0);

  assign out_en    = is_final;
  assign out       = res_value;
  assign out_label = res_label;

  assign fb_valid  = res_valid && !is_final;
  assign fb_label  = res_label;
  assign fb_value  = res_value;

  a_no_underflow: assert property (@(posedge clk) disable iff (rst)
      dec |-> (cnt[iss_label] != '0))
    else $error("addition counter underflow");

endmodule
