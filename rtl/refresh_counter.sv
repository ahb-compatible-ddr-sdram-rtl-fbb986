// refresh_counter: periodic refresh request generator.
//
// Once initialization is done (enable high) the counter counts sys_clk
// cycles; every REF_INTERVAL cycles it raises ref_req and holds it until the
// controller answers with ref_ack, then drops it on the first clock of the acknowledge, as the refresh handshake
// requires (the request must stay up until acknowledged and must be removed
// on the acknowledge, or a second refresh follows). Counting continues while
// a request waits, so the average refresh rate is one per REF_INTERVAL even
// when a read or write cycle delays a refresh.
//
// Interface: clk, reset (async, active high), enable, ref_ack in; ref_req
// out (registered).
//
// The paper places a refresh counter in the main control module and shows
// sys_ref_req as the controller's input; this module drives that input.
// The interval is this design's choice: 780 clocks is 7.8 us at the 10 ns
// clock, the usual 64 ms / 8192 rows of a DDR device.
//
// The assertions are disabled during reset ('disable iff (reset)'); lint
// therefore reports reset as used both as an asynchronous reset and as
// logic, which is intended.
module refresh_counter #(
  parameter int unsigned REF_INTERVAL = 780,
  parameter int unsigned CNT_W        = $clog2(REF_INTERVAL + 1)
) (
  input  logic clk,
  input  logic reset,
  input  logic enable,
  input  logic ref_ack,
  output logic ref_req
);

  logic [CNT_W-1:0] cnt;
  logic             tick;
  logic             ack_q;   // ref_ack one clock ago: the request is dropped on its rising edge

  assign tick = (cnt == CNT_W'(REF_INTERVAL - 1));

  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      cnt     <= '0;
      ref_req <= 1'b0;
      ack_q   <= 1'b0;
    end else if (enable) begin
      cnt   <= tick ? '0 : cnt + 1'b1;
      ack_q <= ref_ack;
      // A tick that falls inside a refresh cycle raises the next request.
      if (tick)                   ref_req <= 1'b1;
      else if (ref_ack && !ack_q) ref_req <= 1'b0;
    end
  end

  // The request is held until it is acknowledged.
  a_req_held: assert property (@(posedge clk) disable iff (reset)
                               enable && ref_req && !ref_ack |=> ref_req);

endmodule
