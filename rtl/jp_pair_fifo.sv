// jp_pair_fifo -- small register FIFO of ready-to-add subsum pairs.
//
// Buffers pairs found by the pair identifier until the state machine gives the
// adder to subsums (state 0). The accumulator's analysis bounds the backlog by
// the depth of the reduction tree of the at most p subsums left after a
// dataset's last input, so the default depth is ceil(log2 p) = 4 for p = 14.
//
// Interface: an entry is W bits (label and two operands, packed by the user).
// `push/din` write on the clock edge; `dout` is the oldest entry and `not_empty`
// says it is valid; `pop` removes it on the clock edge. Push and pop in the same
// cycle are allowed also when full. A push into a full FIFO without a pop is
// dropped and flagged on `overflow` (and by an assertion); the sizing rule says
// it cannot happen for legal input. A pushed entry is visible on `dout` from the
// next cycle. Synchronous reset empties the FIFO.
//
// The depth rule and the use of registers follow the paper; pointer and
// overflow handling are this design's.
module jp_pair_fifo #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned W     = 130
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         not_empty,
  output logic         full,
  output logic         overflow,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic          do_push, do_pop;

  assign not_empty = (count != '0);
  assign full      = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_pop    = pop && not_empty;
  assign do_push   = push && (!full || do_pop);
  assign overflow  = push && full && !do_pop;
  assign dout      = mem[rd_ptr];

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) begin
        mem[wr_ptr] <= din;
        wr_ptr      <= next_ptr(wr_ptr);
      end
      if (do_pop) rd_ptr <= next_ptr(rd_ptr);
      count <= count + {{($bits(count)-1){1'b0}}, do_push} - {{($bits(count)-1){1'b0}}, do_pop};
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) !overflow)
    else $error("pair FIFO overflow");

endmodule
