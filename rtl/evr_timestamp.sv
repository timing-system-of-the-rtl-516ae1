// Timestamp counter of the event receiver.
//
// Counts event-clock cycles (20 ns). A decoded reset event clears it; since
// every receiver gets the same event in the same cycle, all counters of the
// system then read the same time, which makes the event system a global time
// base. The cycle in which the reset event is decoded is time 0: ts reads 0
// in that cycle (combinationally, so an event that both resets the counter
// and is latched into the event FIFO is stored with time 0) and 1 in the next.
//
// The counter and its synchronous reset by event follow the published
// design; counting event-clock cycles and the 32-bit width are this design's
// own choices.
module evr_timestamp
  import evs_pkg::*;
#(
  parameter int unsigned W = TS_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         ts_reset,
  output logic [W-1:0] ts
);
  logic [W-1:0] cnt_q;

  assign ts = ts_reset ? '0 : cnt_q;

  always_ff @(posedge clk) begin
    if (rst) cnt_q <= '0;
    else     cnt_q <= ts + 1'b1;
  end
endmodule
