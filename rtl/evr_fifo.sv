// Event FIFO of the event receiver.
//
// When a decoded event asks for it (push), the FIFO stores the event code
// together with the timestamp at which it was received, so software can later
// tell exactly when each event of interest arrived. The host reads entries
// in arrival order: dout_* show the oldest entry while empty is low, and pop
// removes it. A push into a full FIFO is dropped and sets the sticky overflow
// flag, cleared by ovf_clr. A push and a pop may happen in the same cycle.
//
// Timing: an entry pushed in cycle T is visible at dout in cycle T+1.
//
// Latching timestamps on events follows the published design; depth, full
// behaviour and read interface are this design's own choices.
module evr_fifo
  import evs_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = TS_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         push,
  input  evcode_t      push_code,
  input  logic [W-1:0] push_ts,
  input  logic         pop,
  output evcode_t      dout_code,
  output logic [W-1:0] dout_ts,
  output logic         empty,
  output logic         full,
  output logic         overflow,
  input  logic         ovf_clr
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef struct packed {
    evcode_t      code;
    logic [W-1:0] ts;
  } entry_t;

  entry_t        mem [DEPTH];
  logic [AW:0]   wp_q, rp_q;
  logic          do_push, do_pop;

  assign empty   = (wp_q == rp_q);
  assign full    = (wp_q[AW-1:0] == rp_q[AW-1:0]) && (wp_q[AW] != rp_q[AW]);
  assign do_pop  = pop && !empty;
  assign do_push = push && !full;
  assign dout_code = mem[rp_q[AW-1:0]].code;
  assign dout_ts   = mem[rp_q[AW-1:0]].ts;

  always_ff @(posedge clk) begin
    if (do_push) mem[wp_q[AW-1:0]] <= '{code: push_code, ts: push_ts};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp_q     <= '0;
      rp_q     <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wp_q <= wp_q + 1'b1;
      if (do_pop)  rp_q <= rp_q + 1'b1;
      if (push && full) overflow <= 1'b1;
      else if (ovf_clr) overflow <= 1'b0;
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (rst) empty |-> !do_pop);
endmodule
