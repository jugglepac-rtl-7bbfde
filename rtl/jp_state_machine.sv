// jp_state_machine -- the two-state scheduler of the JugglePAC accumulator.
//
// In state 1 (st = 1) the adder slot of this cycle is given to the input stream:
// the element that arrived in the previous cycle is added to the one arriving
// now. In state 0 (st = 0) the slot is given to a ready pair of subsums from the
// pair FIFO. The machine alternates every cycle, so the adder does one input
// addition every two cycles and has the other cycle free for reducing subsums.
//
// Odd-length datasets: when a new dataset starts while the machine is in state 1,
// the previous element is the unpaired last element of the previous dataset. It
// is added to 0 in that cycle, and the machine stays in state 1 for one more
// cycle so that the first two elements of the new dataset are paired as usual.
//
// Interface: `start` marks the first element of a dataset. `st` is the state of
// the current cycle (combinational use by the operand multiplexers); it changes
// on the clock edge. Synchronous active-high reset to state 0.
//
// The two states, their meaning, the alternation and the extra state-1 cycle
// after an odd-length dataset follow the paper; the reset state 0 is printed
// in its diagram. Deriving "odd length" from a start pulse seen in state 1 is
// this design's formulation of that rule.
module jp_state_machine (
  input  logic clk,
  input  logic rst,
  input  logic start,
  output logic st,
  output logic odd_hold      // start seen in state 1: previous dataset had odd length
);

  typedef enum logic {ST0 = 1'b0, ST1 = 1'b1} state_e;

  state_e state_q, state_d;

  always_comb begin
    unique case (state_q)
      ST0:     state_d = ST1;
      ST1:     state_d = start ? ST1 : ST0;
      default: state_d = ST0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) state_q <= ST0;
    else     state_q <= state_d;
  end

  assign st       = (state_q == ST1);
  assign odd_hold = (state_q == ST1) && start;

endmodule
