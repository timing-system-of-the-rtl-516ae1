// AC line synchronisation: makes the sequence start trigger of the injection
// cycle.
//
// The injector runs a 320 ms (3.125 Hz) cycle. This block counts rising edges
// of the mains reference (50 Hz, so every MAINS_DIV = 16th edge gives 3.125 Hz)
// and, after the counted edge, waits for the next bucket-0 alignment fiducial
// of the bunch clock; on that fiducial it raises `start` for one event-clock
// cycle. The trigger is therefore locked both to the mains phase and to the
// RF bucket pattern.
//
// Interface: clk is the event clock; mains is asynchronous and passes a
// two-flop synchroniser; coinc is a one-cycle event-clock-domain fiducial.
// Timing: start is registered and appears the cycle after coinc is seen.
//
// The published design names this block and its output only; mains locking
// and the divide-by-16 are this design's reading of the 3.125 Hz cycle.
module ac_line_sync #(
  parameter int unsigned MAINS_DIV = 16
) (
  input  logic clk,
  input  logic rst,
  input  logic mains,
  input  logic coinc,
  output logic start
);
  logic [2:0] sync_q;            // two synchroniser stages + edge history
  logic [$clog2(MAINS_DIV+1)-1:0] cnt_q;
  logic armed_q;
  logic mains_rise;

  assign mains_rise = sync_q[1] & ~sync_q[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      sync_q  <= '0;
      cnt_q   <= '0;
      armed_q <= 1'b0;
      start   <= 1'b0;
    end else begin
      sync_q <= {sync_q[1:0], mains};
      start  <= 1'b0;
      if (mains_rise) begin
        if (32'(cnt_q) == MAINS_DIV - 1) begin
          cnt_q   <= '0;
          armed_q <= 1'b1;
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
      if (armed_q && coinc) begin
        start   <= 1'b1;
        armed_q <= 1'b0;
      end
    end
  end
endmodule
