// Timing system top: reference generation, event generator, one fanout card
// and the event receivers behind it.
//
// Signal flow: the 500 MHz RF drives the bunch clock, which makes the 50 MHz
// event clock and the booster, storage-ring and bucket-0 alignment fiducials.
// The AC line sync turns the mains reference and the alignment fiducial into
// the sequence start trigger (3.125 Hz, one 320 ms injection cycle), which
// goes to the generator's external trigger input; the booster revolution
// fiducial goes to its external clock input. The generator's event stream is
// copied by the fanout card to NUM_EVR receivers. The optical link and the
// transceivers carry the 8-bit code per event-clock cycle unchanged and the
// receivers run on the recovered event clock, so here all of them share the
// generator's event clock; each receiver's transceiver lock is an input.
//
// Host access of generator and receivers (through the VME interface on the
// real cards) is brought out as plain ports. Everything after the bunch clock
// runs on ev_clk and is reset by the bunch clock's ev_rst.
//
// The chain of blocks follows the structure diagram of the published design;
// the port lists are this design's own.
module sls_timing_system
  import evs_pkg::*;
#(
  parameter int unsigned NUM_EVR = 8
) (
  input  logic                      rf_clk,
  input  logic                      rst,
  input  logic                      mains,
  output logic                      ev_clk,
  output logic                      ev_rst,
  output logic                      bst_rev,
  output logic                      sr_rev,
  output logic                      coinc,
  output logic                      seq_start,
  // event generator host access
  input  evcode_t                   up_code,
  input  evg_seq_cfg_t [1:0]        seq_cfg,
  input  logic [1:0]                seq_arm,
  input  logic [1:0]                seq_sw_start,
  input  logic                      ram_we,
  input  logic                      ram_sel,
  input  logic [RAM_AW-1:0]         ram_waddr,
  input  evcode_t                   ram_wdata,
  input  logic                      sw_wr,
  input  evcode_t                   sw_code,
  output evcode_t                   evg_tx,
  output logic [1:0]                seq_running,
  output logic [1:0]                seq_armed,
  output logic [1:0]                seq_overflow,
  output logic                      sw_busy,
  // event receivers
  input  logic [NUM_EVR-1:0]        link_locked,
  input  logic [NUM_EVR-1:0]        map_we,
  input  evcode_t                   map_addr,
  input  evr_action_t               map_data,
  input  evr_cfg_t [NUM_EVR-1:0]    evr_cfg,
  output evcode_t [NUM_EVR-1:0]     evr_tx,
  output logic [NUM_EVR-1:0][N_DLY-1:0] dly_out,
  output logic [NUM_EVR-1:0][N_WID-1:0] wid_out,
  output logic [NUM_EVR-1:0][N_REF-1:0] ref_out,
  output logic [NUM_EVR-1:0][TS_W-1:0]  ts,
  input  logic [NUM_EVR-1:0]        fifo_pop,
  output evcode_t [NUM_EVR-1:0]     fifo_code,
  output logic [NUM_EVR-1:0][TS_W-1:0] fifo_ts,
  output logic [NUM_EVR-1:0]        fifo_empty,
  output logic [NUM_EVR-1:0]        fifo_full,
  output logic [NUM_EVR-1:0]        fifo_overflow,
  input  logic [NUM_EVR-1:0]        fifo_ovf_clr
);
  bunch_clock u_bunch (
    .rf_clk  (rf_clk),
    .rst     (rst),
    .ev_clk  (ev_clk),
    .bst_rev (bst_rev),
    .sr_rev  (sr_rev),
    .coinc   (coinc),
    .ev_rst  (ev_rst)
  );

  ac_line_sync u_acl (
    .clk   (ev_clk),
    .rst   (ev_rst),
    .mains (mains),
    .coinc (coinc),
    .start (seq_start)
  );

  evg u_evg (
    .clk          (ev_clk),
    .rst          (ev_rst),
    .ext_trig     (seq_start),
    .ext_clk      (bst_rev),
    .up_code      (up_code),
    .seq_cfg      (seq_cfg),
    .seq_arm      (seq_arm),
    .seq_sw_start (seq_sw_start),
    .ram_we       (ram_we),
    .ram_sel      (ram_sel),
    .ram_waddr    (ram_waddr),
    .ram_wdata    (ram_wdata),
    .sw_wr        (sw_wr),
    .sw_code      (sw_code),
    .tx_code      (evg_tx),
    .seq_running  (seq_running),
    .seq_armed    (seq_armed),
    .seq_overflow (seq_overflow),
    .sw_busy      (sw_busy)
  );

  // Fanout card: the same stream on every output
  for (genvar i = 0; i < NUM_EVR; i++) begin : g_evr
    evr u_evr (
      .clk           (ev_clk),
      .rst           (ev_rst),
      .rx_code       (evg_tx),
      .rx_locked     (link_locked[i]),
      .tx_code       (evr_tx[i]),
      .map_we        (map_we[i]),
      .map_addr      (map_addr),
      .map_data      (map_data),
      .cfg           (evr_cfg[i]),
      .dly_out       (dly_out[i]),
      .wid_out       (wid_out[i]),
      .ref_out       (ref_out[i]),
      .ts            (ts[i]),
      .fifo_pop      (fifo_pop[i]),
      .fifo_code     (fifo_code[i]),
      .fifo_ts       (fifo_ts[i]),
      .fifo_empty    (fifo_empty[i]),
      .fifo_full     (fifo_full[i]),
      .fifo_overflow (fifo_overflow[i]),
      .fifo_ovf_clr  (fifo_ovf_clr[i])
    );
  end
endmodule
