// Event decode table of the event receiver.
//
// Each receiver acts only on the events that concern its crate. The table
// has one entry per event code (256); an entry says which output channels the
// code triggers, whether it is latched into the event FIFO and whether it
// resets the timestamp counter. The host writes entries; the received code
// addresses the table every cycle. The null code 0 never acts.
//
// Timing: act and act_code are registered, one cycle after code. The table
// is not reset: the host writes all entries it relies on.
//
// Decoding and per-crate programmed actions follow the published design; a
// lookup table with this entry format is this design's own choice.
module evr_map
  import evs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        we,
  input  evcode_t     waddr,
  input  evr_action_t wdata,
  input  evcode_t     code,
  output evr_action_t act,
  output evcode_t     act_code
);
  evr_action_t tbl [2**CODE_W];

  always_ff @(posedge clk) begin
    if (we) tbl[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      act      <= '0;
      act_code <= EV_NULL;
    end else begin
      act      <= (code != EV_NULL) ? tbl[code] : '0;
      act_code <= code;
    end
  end
endmodule
