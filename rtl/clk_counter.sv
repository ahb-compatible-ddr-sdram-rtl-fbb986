// clk_counter: the controller's clock counter.
//
// Counts the clocks the controller's state machines have spent in their
// current state. Whenever a state machine changes state it raises
// sync_reset (the "syncResetClkCNT" signal of the controller) for the clock
// of the change, so in the first clock of every state the count reads 0, in
// the second 1, and so on. A wait state of N clocks ends when the count
// equals N-1. The count saturates at its maximum instead of wrapping.
//
// Interface: clk, reset (asynchronous, active high), sync_reset (synchronous
// clear), count. Timing: count is a register, updated on the rising edge.
//
// The block and its sync reset are named in the paper's figures; the
// up-counting with saturation and the 32-bit width (the synthesis report
// lists 32-bit counters) are this design's choices.
module clk_counter #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             sync_reset,
  output logic [CNT_W-1:0] count
);

  always_ff @(posedge clk or posedge reset) begin
    if (reset)                 count <= '0;
    else if (sync_reset)       count <= '0;
    else if (count != '1)      count <= count + 1'b1;
  end

endmodule
