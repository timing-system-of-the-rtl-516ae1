// Bunch clock: the RF downconverter and fiducial generator.
//
// Runs on the 500 MHz RF clock and keeps three counters: the RF bucket modulo
// EV_DIV (which gives the 50 MHz event clock), the booster bucket modulo
// H_BST and the storage-ring bucket modulo H_SR. With the harmonic numbers
// 450 and 480 the two rings' bucket 0 line up every 7200 RF cycles (16 booster
// turns, 15 storage-ring turns, 14.4 us); that alignment is the one fiducial
// from which the event generator builds the whole injection cycle.
//
// Interface and timing: ev_clk is high for EV_DIV/2 RF cycles and rises on
// the RF cycle in which the bucket counters are at 0. The three fiducials are
// meant for the event-clock domain: each is switched at an ev_clk falling edge
// and stays high for one full event-clock period, so the event-clock rising
// edge that coincides with bucket 0 samples it exactly once. This needs
// H_BST and H_SR to be multiples of EV_DIV, as they are for the SLS.
// The event clock stops while rst is high, so the block also hands the
// event-clock domain its own reset, ev_rst, which stays high for seven
// event-clock periods after rst falls and changes on falling ev_clk edges.
//
// The harmonic numbers and the 500/50 MHz ratio follow the published design;
// the counter structure and the fiducial timing are this design's own choice.
module bunch_clock #(
  parameter int unsigned H_BST  = 450,
  parameter int unsigned H_SR   = 480,
  parameter int unsigned EV_DIV = 10
) (
  input  logic rf_clk,
  input  logic rst,
  output logic ev_clk,
  output logic bst_rev,
  output logic sr_rev,
  output logic coinc,
  output logic ev_rst
);
  localparam int unsigned HALF = EV_DIV - EV_DIV / 2;  // RF cycles from falling to rising edge

  logic [$clog2(EV_DIV)-1:0] d_q, d_n;
  logic [$clog2(H_BST)-1:0]  b_q, b_n;
  logic [$clog2(H_SR)-1:0]   s_q, s_n;
  logic [2:0]                r_q;        // event-clock periods since reset

  always_comb begin
    d_n = (32'(d_q) == EV_DIV - 1) ? '0 : d_q + 1'b1;
    b_n = (32'(b_q) == H_BST - 1)  ? '0 : b_q + 1'b1;
    s_n = (32'(s_q) == H_SR - 1)   ? '0 : s_q + 1'b1;
  end

  always_ff @(posedge rf_clk) begin
    if (rst) begin
      d_q <= '0; b_q <= '0; s_q <= '0;
      ev_clk <= 1'b1; bst_rev <= 1'b0; sr_rev <= 1'b0; coinc <= 1'b0;
      r_q <= '0; ev_rst <= 1'b1;
    end else begin
      d_q <= d_n; b_q <= b_n; s_q <= s_n;
      ev_clk <= (32'(d_n) < EV_DIV / 2);
      if (32'(d_n) == EV_DIV / 2) begin
        // bucket counters as they will be at the next event-clock rising edge
        bst_rev <= (32'(b_n) == H_BST - HALF);
        sr_rev  <= (32'(s_n) == H_SR - HALF);
        coinc   <= (32'(b_n) == H_BST - HALF) && (32'(s_n) == H_SR - HALF);
        if (r_q != 3'd7) r_q <= r_q + 1'b1;
        ev_rst  <= (r_q != 3'd7);
      end
    end
  end
endmodule
