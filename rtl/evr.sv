// Event receiver (EVR).
//
// The receiver sits in each crate and turns the broadcast event stream into
// local actions. The code received in each 20 ns slot is registered, looked
// up in the decode table, and the table entry then
//   - triggers any of the N_DLY delay+width and N_WID width-only channels,
//   - latches the code with the current timestamp into the event FIFO,
//   - clears the timestamp counter (synchronous reset of all receivers).
// Three reference outputs give divided event-clock frequencies. The received
// stream is also retransmitted unchanged, one cycle later, so receivers can
// be cascaded in a daisy chain. While the transceiver reports no lock, the
// received code is treated as null.
//
// Timing: a code at rx_code in cycle T is registered at T+1, decoded at T+2
// (channel trigger, FIFO push, timestamp clear); a channel with delay d,
// width w and prescaler p is then active in cycles T+3+d*p ... T+2+(d+w)*p.
// The FIFO stores the timestamp value of cycle T+2.
//
// Channel counts, prescaler, polarity, timestamp, FIFO and daisy chaining
// follow the published design; the pipeline and the interfaces are this
// design's own choices.
module evr
  import evs_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic              clk,
  input  logic              rst,
  input  evcode_t           rx_code,
  input  logic              rx_locked,
  output evcode_t           tx_code,
  input  logic              map_we,
  input  evcode_t           map_addr,
  input  evr_action_t       map_data,
  input  evr_cfg_t          cfg,
  output logic [N_DLY-1:0]  dly_out,
  output logic [N_WID-1:0]  wid_out,
  output logic [N_REF-1:0]  ref_out,
  output logic [TS_W-1:0]   ts,
  input  logic              fifo_pop,
  output evcode_t           fifo_code,
  output logic [TS_W-1:0]   fifo_ts,
  output logic              fifo_empty,
  output logic              fifo_full,
  output logic              fifo_overflow,
  input  logic              fifo_ovf_clr
);
  evcode_t     rx_q;
  evr_action_t act;
  evcode_t     act_code;

  always_ff @(posedge clk) begin
    if (rst) rx_q <= EV_NULL;
    else     rx_q <= rx_locked ? rx_code : EV_NULL;
  end
  assign tx_code = rx_q;

  evr_map u_map (
    .clk      (clk),
    .rst      (rst),
    .we       (map_we),
    .waddr    (map_addr),
    .wdata    (map_data),
    .code     (rx_q),
    .act      (act),
    .act_code (act_code)
  );

  for (genvar i = 0; i < N_DLY; i++) begin : g_dly
    evr_pulse #(.HAS_DELAY(1'b1)) u_ch (
      .clk (clk), .rst (rst), .cfg (cfg.dly[i]), .trig (act.dly_trig[i]), .out (dly_out[i])
    );
  end

  for (genvar i = 0; i < N_WID; i++) begin : g_wid
    evr_pulse #(.HAS_DELAY(1'b0)) u_ch (
      .clk (clk), .rst (rst), .cfg (cfg.wid[i]), .trig (act.wid_trig[i]), .out (wid_out[i])
    );
  end

  evr_timestamp #(.W(TS_W)) u_ts (
    .clk (clk), .rst (rst), .ts_reset (act.ts_reset), .ts (ts)
  );

  evr_fifo #(.DEPTH(FIFO_DEPTH), .W(TS_W)) u_fifo (
    .clk       (clk),
    .rst       (rst),
    .push      (act.fifo_latch),
    .push_code (act_code),
    .push_ts   (ts),
    .pop       (fifo_pop),
    .dout_code (fifo_code),
    .dout_ts   (fifo_ts),
    .empty     (fifo_empty),
    .full      (fifo_full),
    .overflow  (fifo_overflow),
    .ovf_clr   (fifo_ovf_clr)
  );

  evr_refclk #(.NREF(N_REF), .W(REF_W)) u_ref (
    .clk (clk), .rst (rst), .div (cfg.ref_div), .ref_out (ref_out)
  );
endmodule
