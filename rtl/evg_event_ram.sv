// Event RAM of the event generator: stores one event sequence.
//
// Each address holds the 8-bit event code to be sent at one tick of the RAM
// clock (code 0 = nothing to send). The published generator carries two
// 512 KB RAMs; with one code per byte that is 2^19 ticks, and at one tick
// per booster turn (900 ns) a sequence can span 472 ms, more than the 320 ms
// injection cycle.
//
// Interface: one host write port and one read port for the sequencer.
// Timing: rdata is registered, valid the cycle after raddr. The contents are
// not reset; the host loads them before a sequence is started.
module evg_event_ram #(
  parameter int unsigned AW = 19,
  parameter int unsigned DW = 8
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
