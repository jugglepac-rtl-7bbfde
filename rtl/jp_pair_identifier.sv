// jp_pair_identifier -- finds pairs of subsums of the same dataset.
//
// Holds one register per label (2^L registers). A subsum that comes back from
// the adder and is not a final result is steered by its label: if its label's
// register is empty, the subsum waits there; if the register already holds a
// subsum of that label, the two form a ready-to-add pair, which is handed to the
// pair FIFO together with the label, and the register is emptied.
//
// Interface: `in_valid/in_label/in_value` carry one returning subsum per cycle.
// `pair_valid/pair_label/pair_a/pair_b` present the pair combinationally in the
// same cycle (pair_a is the older, waiting subsum); the FIFO registers it.
// Register contents change on the clock edge. Synchronous reset empties all
// registers.
//
// The per-label registers, the pairing by label and the hand-off to the FIFO
// follow the paper. The paper's diagram prints the registers as reg_0 ... reg_2^L;
// this design uses one per label value, 2^L in all.
module jp_pair_identifier
  import jp_pkg::*;
#(
  parameter int unsigned L = 2
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [L-1:0] in_label,
  input  fp_t          in_value,
  output logic         pair_valid,
  output logic [L-1:0] pair_label,
  output fp_t          pair_a,
  output fp_t          pair_b
);

  localparam int unsigned NREG = 1 << L;

  fp_t              held_value [NREG];
  logic [NREG-1:0]  held_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      held_valid <= '0;
    end else if (in_valid) begin
      if (held_valid[in_label]) begin
        held_valid[in_label] <= 1'b0;
      end else begin
        held_valid[in_label] <= 1'b1;
        held_value[in_label] <= in_value;
      end
    end
  end

  assign pair_valid = in_valid && held_valid[in_label];
  assign pair_label = in_label;
  assign pair_a     = held_value[in_label];
  assign pair_b     = in_value;

endmodule
