// Software event register of the event generator.
//
// The host writes an event code; the register holds it and requests a slot
// from the priority resolver until the code has been sent, so a code written
// from software goes out once, in the first slot no higher-priority source
// uses. `busy` is high while a code waits. A write while busy replaces the
// waiting code; writing the null code 0 does nothing.
//
// Timing: a write in cycle T requests from cycle T+1; without competition the
// code is on the link in cycle T+2.
//
// Sending events by writing a register follows the published design; the
// overwrite rule is this design's own choice.
module evg_sw_event
  import evs_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    wr,
  input  evcode_t wcode,
  output logic    req_valid,
  output evcode_t req_code,
  input  logic    grant,
  output logic    busy
);
  assign busy = req_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      req_valid <= 1'b0;
      req_code  <= EV_NULL;
    end else if (wr && wcode != EV_NULL) begin
      req_valid <= 1'b1;
      req_code  <= wcode;
    end else if (grant) begin
      req_valid <= 1'b0;
    end
  end

  a_grant_valid: assert property (@(posedge clk) disable iff (rst) grant |-> req_valid);
endmodule
