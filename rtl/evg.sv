// Event generator (EVG).
//
// The generator is the source of the event stream: every 20 ns it sends one
// 8-bit event code (0 = no event) to the gigabit transceiver. Events come from
// four sources, merged by the priority resolver in this order:
//   0  the upstream stream, when this generator is added to a sub-branch
//      behind another generator (tie up_code to 0 otherwise);
//   1  sequencer 0 playing event RAM 0;
//   2  sequencer 1 playing event RAM 1;
//   3  the software event register.
// Each sequencer is started by the external trigger input (if cfg.trig_en)
// or by a host strobe, and clocked by its internal prescaler or the external
// clock input. The host loads the event RAMs through one write port (ram_sel
// chooses the RAM).
//
// Timing: tx_code is registered. With no competition, a code at address k of
// a RAM clocked internally goes out in cycle T+4+k*div after the trigger in
// cycle T; a software event written in cycle T goes out in cycle T+2; an
// upstream code is delayed by one cycle.
//
// The two RAMs, their playback, the priority resolver, the software register,
// the external clock and trigger inputs and the sub-branch follow the
// published design; the priority order and the interfaces are this design's.
module evg
  import evs_pkg::*;
#(
  parameter int unsigned NSEQ = 2,
  parameter int unsigned AW   = RAM_AW
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     ext_trig,
  input  logic                     ext_clk,
  input  evcode_t                  up_code,
  input  evg_seq_cfg_t [NSEQ-1:0]  seq_cfg,
  input  logic [NSEQ-1:0]          seq_arm,
  input  logic [NSEQ-1:0]          seq_sw_start,
  input  logic                     ram_we,
  input  logic [$clog2(NSEQ)-1:0]  ram_sel,
  input  logic [AW-1:0]            ram_waddr,
  input  evcode_t                  ram_wdata,
  input  logic                     sw_wr,
  input  evcode_t                  sw_code,
  output evcode_t                  tx_code,
  output logic [NSEQ-1:0]          seq_running,
  output logic [NSEQ-1:0]          seq_armed,
  output logic [NSEQ-1:0]          seq_overflow,
  output logic                     sw_busy
);
  localparam int unsigned NSRC = NSEQ + 2;

  logic [NSRC-1:0]    req_valid, grant;
  evcode_t [NSRC-1:0] req_code;

  assign req_valid[0] = (up_code != EV_NULL);
  assign req_code[0]  = up_code;

  for (genvar i = 0; i < NSEQ; i++) begin : g_seq
    logic [AW-1:0] raddr;
    evcode_t       rdata;

    evg_event_ram #(.AW(AW), .DW(CODE_W)) u_ram (
      .clk   (clk),
      .we    (ram_we && (32'(ram_sel) == i)),
      .waddr (ram_waddr),
      .wdata (ram_wdata),
      .raddr (raddr),
      .rdata (rdata)
    );

    evg_sequencer #(.AW(AW)) u_seq (
      .clk       (clk),
      .rst       (rst),
      .cfg       (seq_cfg[i]),
      .trig      ((seq_cfg[i].trig_en && ext_trig) || seq_sw_start[i]),
      .arm       (seq_arm[i]),
      .ext_tick  (ext_clk),
      .raddr     (raddr),
      .rdata     (rdata),
      .req_valid (req_valid[1+i]),
      .req_code  (req_code[1+i]),
      .grant     (grant[1+i]),
      .running   (seq_running[i]),
      .armed     (seq_armed[i]),
      .overflow  (seq_overflow[i])
    );
  end

  evg_sw_event u_sw (
    .clk       (clk),
    .rst       (rst),
    .wr        (sw_wr),
    .wcode     (sw_code),
    .req_valid (req_valid[NSRC-1]),
    .req_code  (req_code[NSRC-1]),
    .grant     (grant[NSRC-1]),
    .busy      (sw_busy)
  );

  evg_priority #(.NSRC(NSRC)) u_prio (
    .clk       (clk),
    .rst       (rst),
    .req_valid (req_valid),
    .req_code  (req_code),
    .grant     (grant),
    .tx_code   (tx_code)
  );
endmodule
