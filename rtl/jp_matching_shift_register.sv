// jp_matching_shift_register -- label pipeline that runs beside the adder.
//
// A plain shift register whose length equals the adder latency, so that the tag
// written next to an addition comes out in the same cycle as that addition's
// result. The tag carries the addition's dataset label and, in this design, the
// valid bit the output identifier needs at the adder output (the adder slot of
// that cycle was used).
//
// Interface: `tag_in` is sampled every clock; `tag_out` is `tag_in` delayed by
// exactly P clock edges. Synchronous reset clears every stage, so no stale valid
// bit can come out after reset.
//
// A label shift register with the adder's latency follows the paper; carrying
// the valid bit in it (rather than in a second pipeline inside the
// output identifier, as the paper's diagram draws) is this design's choice.
module jp_matching_shift_register #(
  parameter int unsigned P = 14,   // adder latency
  parameter int unsigned W = 4     // tag width
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] tag_in,
  output logic [W-1:0] tag_out
);

  logic [W-1:0] sr [P];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(P); i++) sr[i] <= '0;
    end else begin
      sr[0] <= tag_in;
      for (int i = 1; i < int'(P); i++) sr[i] <= sr[i-1];
    end
  end

  assign tag_out = sr[P-1];

endmodule
