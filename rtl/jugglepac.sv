// jugglepac -- fully pipelined accumulator of back-to-back floating-point
// datasets with a single pipelined adder.
//
// One value arrives per clock. Datasets follow each other without gaps and have
// any length above a minimum; each dataset's sum comes out once, with its label.
// The adder is shared in time: in every other cycle (state 1) it adds two
// consecutive inputs, in the cycles between (state 0) it adds a pair of
// subsums of one dataset. Subsums carry the label of their dataset through a
// shift register beside the adder, so subsums of up to 2^L datasets can be in
// flight at once. Returning subsums are paired per label (pair identifier),
// queued (pair FIFO) and fed back in state 0. Per-label addition counters
// (output identifier) recognise the last subsum of a dataset and send it out.
//
// Interface
//   in/valid/start : data in; `start` marks a dataset's first element (valid must
//                    be 1 with it). valid = 0 inserts a 0 into the current
//                    dataset. A dataset ends when the next one starts, so the
//                    last dataset of a stream is closed by a further `start`.
//   out/out_en     : final sum of a dataset, for one cycle; `out_label` is that
//                    dataset's label (labels count 0, 1, ... modulo 2^L).
//   fifo_overflow  : diagnostic, never set for legal input.
// Datasets must hold at least MIN_LEN elements: the paper's Eq. (1) evaluated
// with the loop latency P + 2 instead of P, i.e. 28 for P = 14, L = 2 (the paper
// states 25; at 25 a label can be reused before its previous dataset's sum is
// out, see the documentation).
// Latency from a dataset's last element to its sum depends on its length and the
// previous dataset's; see the accompanying documentation for measured values.
//
// Parameters: P is the adder latency (14, the value the paper's minimum-length
// figures imply), L the label width (2, the configuration the paper builds on
// both FPGAs), FIFO_DEPTH ceil(log2 P) as the paper sizes it.
//
// Structure, block names, state machine, labels and the FIFO depth follow the
// paper. binary64 arithmetic, the exact reset and start-up behaviour and the
// label output are this design's choices.
module jugglepac
  import jp_pkg::*;
#(
  parameter int unsigned P          = 14,
  parameter int unsigned L          = 2,
  parameter int unsigned FIFO_DEPTH = $clog2(P)
) (
  input  logic         clk,
  input  logic         rst,
  input  fp_t          in,
  input  logic         valid,
  input  logic         start,
  output fp_t          out,
  output logic         out_en,
  output logic [L-1:0] out_label,
  output logic         fifo_overflow
);

  // Eq. (1) evaluated with the feedback-loop latency P + 2 (adder, pair
  // identifier buffer, FIFO-to-adder register) in place of the adder latency.
  localparam int unsigned MIN_LEN = min_dataset_len(P + 2, L);

  // Tag carried beside each addition.
  typedef struct packed {
    logic         valid;
    logic [L-1:0] label;
  } tag_t;

  // FIFO entry: a ready pair of subsums.
  typedef struct packed {
    logic [L-1:0] label;
    fp_t          a;
    fp_t          b;
  } pair_t;

  logic         st, odd_hold;
  logic [L-1:0] cur_label;

  logic         fifo_pop, fifo_not_empty, fifo_full;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;
  pair_t        fifo_head, fifo_din;

  logic         iss_valid, iss_st, iss_first;
  logic [L-1:0] iss_label;
  fp_t          iss_a, iss_b;

  tag_t         tag_in, tag_out;
  fp_t          sum;

  logic         fb_valid;
  logic [L-1:0] fb_label;
  fp_t          fb_value;

  logic         pair_valid;
  logic [L-1:0] pair_label;
  fp_t          pair_a, pair_b;

  jp_state_machine u_fsm (
    .clk, .rst, .start, .st, .odd_hold
  );

  jp_label_counter #(.L(L)) u_label (
    .clk, .rst, .start, .label(cur_label)
  );

  jp_operand_mux #(.L(L)) u_mux (
    .clk, .rst,
    .in, .valid, .start, .label(cur_label),
    .st, .odd_hold,
    .fifo_valid(fifo_not_empty), .fifo_label(fifo_head.label),
    .fifo_a(fifo_head.a), .fifo_b(fifo_head.b), .fifo_pop,
    .iss_valid, .iss_st, .iss_first, .iss_label, .iss_a, .iss_b
  );

  jp_fp_adder #(.LATENCY(P)) u_adder (
    .clk, .a(iss_a), .b(iss_b), .sum
  );

  assign tag_in = '{valid: iss_valid, label: iss_label};

  jp_matching_shift_register #(.P(P), .W($bits(tag_t))) u_msr (
    .clk, .rst, .tag_in, .tag_out
  );

  jp_output_identifier #(.L(L), .P(P)) u_oid (
    .clk, .rst,
    .iss_valid, .iss_st, .iss_first, .iss_label,
    .res_valid(tag_out.valid), .res_label(tag_out.label), .res_value(sum),
    .out_en, .out, .out_label,
    .fb_valid, .fb_label, .fb_value
  );

  jp_pair_identifier #(.L(L)) u_pi (
    .clk, .rst,
    .in_valid(fb_valid), .in_label(fb_label), .in_value(fb_value),
    .pair_valid, .pair_label, .pair_a, .pair_b
  );

  assign fifo_din = '{label: pair_label, a: pair_a, b: pair_b};

  jp_pair_fifo #(.DEPTH(FIFO_DEPTH), .W($bits(pair_t))) u_fifo (
    .clk, .rst,
    .push(pair_valid), .din(fifo_din), .pop(fifo_pop),
    .dout(fifo_head), .not_empty(fifo_not_empty), .full(fifo_full),
    .overflow(fifo_overflow), .count(fifo_count)
  );

  // Minimum dataset length (Eq. (1)): a new dataset may not start before the
  // current one has MIN_LEN elements.
  int unsigned run_len;
  logic        seen_start;
  always_ff @(posedge clk) begin
    if (rst) begin
      run_len    <= 0;
      seen_start <= 1'b0;
    end else if (start) begin
      run_len    <= 1;
      seen_start <= 1'b1;
    end else if (run_len < MIN_LEN) begin
      run_len    <= run_len + 1;
    end
  end

  a_min_len: assert property (@(posedge clk) disable iff (rst)
      (start && seen_start) |-> (run_len >= MIN_LEN))
    else $error("dataset shorter than the minimum length %0d", MIN_LEN);

endmodule
