// Event RAM sequencer ("store and playback") of the event generator.
//
// On a start trigger the sequencer plays its event RAM from address 0 up to
// cfg.end_addr, one address per tick of the RAM clock. The RAM clock is either
// the event clock divided by cfg.div (45 gives one booster turn, 900 ns, so
// moving an event by one address moves it by one booster turn) or the
// external clock input of the card. Every non-null code read is offered to
// the priority resolver and held there until it is granted.
//
// Modes: in continuous mode (cfg.single = 0) every start trigger runs the
// sequence; in single mode a start trigger runs it only if the host has armed
// the sequencer, and the run disarms it, which gives single injection cycles
// for top-up. A trigger during a run is ignored; clearing cfg.enable aborts.
// If a code is read while the previous one is still waiting for its slot, the
// new code is dropped and the sticky `overflow` flag is set (cleared by reset).
//
// Timing (internal clock): trigger seen in cycle T, address k read in cycle
// T+1+k*div, its code requested from cycle T+3+k*div; with no competing
// source the resolver puts it on the link in cycle T+4+k*div. The internal
// prescaler restarts at each trigger, so the sequence is locked to the
// trigger (the bucket-0 alignment fiducial).
//
// Playback from RAM, the RAM clock of one booster turn and single cycles
// follow the published design; the end address, the mode bits, the overflow
// rule and all timing details are this design's own choices. cfg.trig_en is
// not read here: the generator uses it to gate its external trigger input.
module evg_sequencer
  import evs_pkg::*;
#(
  parameter int unsigned AW = RAM_AW
) (
  input  logic          clk,
  input  logic          rst,
  input  evg_seq_cfg_t  cfg,
  input  logic          trig,
  input  logic          arm,
  input  logic          ext_tick,
  output logic [AW-1:0] raddr,
  input  evcode_t       rdata,
  output logic          req_valid,
  output evcode_t       req_code,
  input  logic          grant,
  output logic          running,
  output logic          armed,
  output logic          overflow
);
  logic [SEQ_DIV_W-1:0] presc_q;
  logic [AW-1:0]        addr_q;
  logic                 rd_v_q;
  logic                 tick;
  logic                 start_ok;

  assign start_ok = trig && cfg.enable && !running && (!cfg.single || armed);
  assign tick     = running && (cfg.ext_clk ? ext_tick : (presc_q == '0));
  assign raddr    = addr_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      running   <= 1'b0;
      armed     <= 1'b0;
      overflow  <= 1'b0;
      presc_q   <= '0;
      addr_q    <= '0;
      rd_v_q    <= 1'b0;
      req_valid <= 1'b0;
      req_code  <= EV_NULL;
    end else begin
      rd_v_q <= tick;
      if (arm) armed <= 1'b1;

      if (start_ok) begin
        running <= 1'b1;
        addr_q  <= '0;
        presc_q <= '0;
        if (cfg.single) armed <= 1'b0;
      end else if (running) begin
        if (!cfg.enable) begin
          running <= 1'b0;
        end else begin
          presc_q <= (presc_q + 1'b1 >= cfg.div) ? '0 : presc_q + 1'b1;
          if (tick) begin
            if (addr_q == AW'(cfg.end_addr)) running <= 1'b0;
            else addr_q <= addr_q + 1'b1;
          end
        end
      end

      // Hand the code read in the previous cycle to the priority resolver
      if (rd_v_q && rdata != EV_NULL) begin
        if (req_valid && !grant) begin
          overflow <= 1'b1;
        end else begin
          req_valid <= 1'b1;
          req_code  <= rdata;
        end
      end else if (grant) begin
        req_valid <= 1'b0;
      end
    end
  end

  // A grant is only given to a pending request
  a_grant_valid: assert property (@(posedge clk) disable iff (rst) grant |-> req_valid);
endmodule
