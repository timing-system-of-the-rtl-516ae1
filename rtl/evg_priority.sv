// Event priority resolver of the event generator.
//
// Several sources may want the same 20 ns slot on the link. The resolver
// grants the lowest-numbered requesting source (fixed priority, source 0
// highest) and registers its code onto the link; the other sources keep
// their requests and try again in the next slot. In an idle slot the null
// code 0 is sent.
//
// Interface: req_valid/req_code per source; grant is one-hot and
// combinational in the same cycle; tx_code is registered (one cycle later).
// In the generator, source 0 is the upstream link (so a generator added in a
// sub-branch never delays the machine's events), then the two sequencers,
// then the software register. The published design names the resolver; the
// fixed order is this design's own choice.
module evg_priority
  import evs_pkg::*;
#(
  parameter int unsigned NSRC = 4
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [NSRC-1:0]     req_valid,
  input  evcode_t [NSRC-1:0]  req_code,
  output logic [NSRC-1:0]     grant,
  output evcode_t             tx_code
);
  evcode_t sel_code;

  always_comb begin
    grant    = '0;
    sel_code = EV_NULL;
    for (int i = NSRC - 1; i >= 0; i--) begin
      if (req_valid[i]) begin
        grant    = '0;
        grant[i] = 1'b1;
        sel_code = req_code[i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) tx_code <= EV_NULL;
    else     tx_code <= sel_code;
  end

  a_onehot: assert property (@(posedge clk) disable iff (rst) $onehot0(grant));
endmodule
