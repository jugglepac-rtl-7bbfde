// jp_operand_mux -- chooses what the adder adds in each cycle and registers it.
//
// Input side: the zero multiplexer replaces the input by 0 in cycles where
// `valid` is low, so gaps inside or after a dataset add zeros to that dataset and
// leave its sum unchanged. Each input element is held for one cycle in a
// previous-element register together with its label.
//
// State 1 (`st` = 1): the held element is added to the current one (label of the
// held element). If a new dataset starts in this cycle (`odd_hold`), the held
// element is the lone last element of the previous dataset and is added to 0
// instead; the current element, the first of the new dataset, is held.
// State 0: the held register takes the current element, and the oldest pair in
// the pair FIFO, if any, is popped and added.
//
// Output: one registered addition per cycle in front of the adder (`iss_*`):
// operands, label, a valid bit, the state it was issued in, and `iss_first`,
// which marks the first state-1 addition of a dataset for the output identifier.
// Before the first `start` after reset nothing is issued. All `iss_*` change on
// the clock edge; `fifo_pop` is combinational.
//
// The zero multiplexer, the state-dependent operand and label multiplexers and
// the pipeline register in front of the adder follow the paper. The padding of
// an odd dataset's last element with 0, the `first` marker and the idle state
// before the first dataset are this design's reading of the text.
module jp_operand_mux
  import jp_pkg::*;
#(
  parameter int unsigned L = 2
) (
  input  logic         clk,
  input  logic         rst,
  // input stream
  input  fp_t          in,
  input  logic         valid,
  input  logic         start,
  input  logic [L-1:0] label,       // label of the current element
  // state machine
  input  logic         st,
  input  logic         odd_hold,
  // pair FIFO head
  input  logic         fifo_valid,
  input  logic [L-1:0] fifo_label,
  input  fp_t          fifo_a,
  input  fp_t          fifo_b,
  output logic         fifo_pop,
  // registered addition in front of the adder
  output logic         iss_valid,
  output logic         iss_st,
  output logic         iss_first,
  output logic [L-1:0] iss_label,
  output fp_t          iss_a,
  output fp_t          iss_b
);

  fp_t          cur;
  fp_t          prev_value;
  logic [L-1:0] prev_label;
  logic         prev_live;     // held element belongs to a dataset
  logic         first_pend;    // next state-1 addition is its dataset's first
  logic         active;        // a dataset has started since reset

  logic         n_valid, n_first;
  logic [L-1:0] n_label;
  fp_t          n_a, n_b;
  logic         capture;

  // Zero multiplexer.
  assign cur = valid ? in : '0;

  // The current element is held in state 0, and in the odd-length case.
  assign capture = !st || odd_hold;

  always_comb begin
    n_valid  = 1'b0;
    n_first  = 1'b0;
    n_label  = prev_label;
    n_a      = prev_value;
    n_b      = cur;
    fifo_pop = 1'b0;
    if (st) begin
      if (prev_live) begin
        n_valid = 1'b1;
        n_first = first_pend;
        if (odd_hold) n_b = '0;
      end
    end else if (fifo_valid) begin
      n_valid  = 1'b1;
      n_label  = fifo_label;
      n_a      = fifo_a;
      n_b      = fifo_b;
      fifo_pop = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev_live  <= 1'b0;
      first_pend <= 1'b0;
      active     <= 1'b0;
      prev_value <= '0;
      prev_label <= '0;
      iss_valid  <= 1'b0;
      iss_st     <= 1'b0;
      iss_first  <= 1'b0;
      iss_label  <= '0;
      iss_a      <= '0;
      iss_b      <= '0;
    end else begin
      if (start) active <= 1'b1;
      if (capture) begin
        prev_value <= cur;
        prev_label <= label;
        prev_live  <= active || start;
      end else begin
        prev_live  <= 1'b0;
      end
      if (start)                  first_pend <= 1'b1;
      else if (st && prev_live)   first_pend <= 1'b0;
      // Pipeline register in front of the adder.
      iss_valid <= n_valid;
      iss_st    <= st;
      iss_first <= n_first;
      iss_label <= n_label;
      iss_a     <= n_a;
      iss_b     <= n_b;
    end
  end

  a_start_is_valid: assert property (@(posedge clk) disable iff (rst) start |-> valid)
    else $error("start without valid");

endmodule
