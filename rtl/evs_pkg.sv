// Event system package: types and constants shared by the event generator
// (EVG), the event receiver (EVR) and the system top.
//
// The link carries one 8-bit event code per 20 ns event-clock cycle; code 0
// is the null code and means "no event in this slot". The channel counts of
// the receiver (4 delay+width channels, 14 width-only channels, 3 reference
// outputs) are the numbers of the published design; the counter widths are
// this design's own choice.
package evs_pkg;

  localparam int unsigned CODE_W = 8;
  typedef logic [CODE_W-1:0] evcode_t;
  localparam evcode_t EV_NULL = '0;

  // Event generator
  localparam int unsigned RAM_AW  = 19;   // 512 KB event RAM, one code per byte
  localparam int unsigned SEQ_DIV_W = 16;

  typedef struct packed {
    logic                 enable;    // sequencer accepts start triggers
    logic                 single;    // 1: run only after an arm strobe, once
    logic                 trig_en;   // external trigger input starts the sequence
    logic                 ext_clk;   // 1: RAM clock from the external clock input
    logic [SEQ_DIV_W-1:0] div;       // internal RAM clock = event clock / div
    logic [RAM_AW-1:0]    end_addr;  // last address played
  } evg_seq_cfg_t;

  // Event receiver
  localparam int unsigned N_DLY = 4;    // channels with delay and width
  localparam int unsigned N_WID = 14;   // channels with width only
  localparam int unsigned N_REF = 3;    // reference-frequency outputs
  localparam int unsigned DLY_W = 24;   // 2^24 x 20 ns = 335 ms > 320 ms cycle
  localparam int unsigned WID_W = 16;
  localparam int unsigned PRE_W = 16;
  localparam int unsigned REF_W = 16;
  localparam int unsigned TS_W  = 32;

  // Actions one event code causes in one receiver (one decode-table entry)
  typedef struct packed {
    logic             ts_reset;    // synchronous reset of the timestamp counter
    logic             fifo_latch;  // store code and timestamp in the event FIFO
    logic [N_WID-1:0] wid_trig;    // trigger width-only channels
    logic [N_DLY-1:0] dly_trig;    // trigger delay+width channels
  } evr_action_t;

  typedef struct packed {
    logic             polarity;  // 1: output idles high, pulse is low
    logic [PRE_W-1:0] presc;     // counting clock = event clock / presc (0 acts as 1)
    logic [DLY_W-1:0] delay;     // in prescaled ticks (ignored by width-only channels)
    logic [WID_W-1:0] width;     // in prescaled ticks, 0 = no pulse
  } evr_pulse_cfg_t;

  typedef struct packed {
    evr_pulse_cfg_t [N_DLY-1:0] dly;
    evr_pulse_cfg_t [N_WID-1:0] wid;
    logic [N_REF-1:0][REF_W-1:0] ref_div;
  } evr_cfg_t;

endpackage
