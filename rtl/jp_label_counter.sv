// jp_label_counter -- dataset label generator ("++Label") of the JugglePAC
// accumulator.
//
// Every dataset gets an L-bit label, one more than the previous dataset's,
// wrapping modulo 2^L. Labels keep the subsums of up to 2^L overlapping datasets
// apart inside the accumulator.
//
// Interface: `start` marks the first element of a new dataset. `label` is the
// label of the element presented in the current cycle: the incremented value in
// the cycle of `start` (combinational), and the stored value otherwise. The
// stored value is updated on the clock edge. After reset the first dataset gets
// label 0.
//
// The incrementing label and its width L follow the paper; the reset value and
// the same-cycle forwarding of the new label are this design's choices.
module jp_label_counter #(
  parameter int unsigned L = 2
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         start,
  output logic [L-1:0] label
);

  logic [L-1:0] label_q;

  always_ff @(posedge clk) begin
    if (rst)        label_q <= '1;
    else if (start) label_q <= label_q + 1'b1;
  end

  assign label = start ? label_q + 1'b1 : label_q;

endmodule
