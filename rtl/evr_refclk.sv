// Reference-frequency outputs of the event receiver.
//
// The receiver card has three extra front-panel outputs; here they give
// square waves at the event clock divided by div[i]: high for floor(div/2)
// cycles of each period of div cycles. A ratio below 2 holds the output low.
// Changing a ratio takes effect at the end of the current period.
//
// Three outputs used as reference frequencies follow the published design;
// the divider is this design's own choice.
module evr_refclk
  import evs_pkg::*;
#(
  parameter int unsigned NREF = N_REF,
  parameter int unsigned W    = REF_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [NREF-1:0][W-1:0]  div,
  output logic [NREF-1:0]         ref_out
);
  for (genvar i = 0; i < NREF; i++) begin : g_ref
    logic [W-1:0] cnt_q;
    always_ff @(posedge clk) begin
      if (rst) begin
        cnt_q      <= '0;
        ref_out[i] <= 1'b0;
      end else begin
        cnt_q      <= (cnt_q + 1'b1 >= div[i]) ? '0 : cnt_q + 1'b1;
        ref_out[i] <= (div[i] >= W'(2)) && (cnt_q < (div[i] >> 1));
      end
    end
  end
endmodule
