// One output channel of the event receiver.
//
// When its decoded event arrives (trig), the channel waits cfg.delay ticks
// (only if HAS_DELAY) and then drives a pulse cfg.width ticks long. A tick is
// cfg.presc event-clock cycles (0 counts as 1); the prescaler restarts at the
// trigger, so delay and width are measured from the event. cfg.polarity = 1
// inverts the output (idle high, pulse low). A width of 0 gives no pulse. A
// new trigger during the delay or the pulse restarts the channel.
//
// The receiver has 4 channels with HAS_DELAY = 1 and 14 with HAS_DELAY = 0.
// Timing: trigger in cycle T; the output is active in cycles
// T+1+delay*presc ... T+(delay+width)*presc.
//
// Delay, width, prescaler and polarity follow the published design; the
// counter widths and the retrigger rule are this design's own choices.
module evr_pulse
  import evs_pkg::*;
#(
  parameter bit HAS_DELAY = 1'b1
) (
  input  logic           clk,
  input  logic           rst,
  input  evr_pulse_cfg_t cfg,
  input  logic           trig,
  output logic           out
);
  typedef enum logic [1:0] {S_IDLE, S_DELAY, S_PULSE} state_t;

  state_t                  state_q;
  logic [PRE_W-1:0]        pre_q;
  logic [DLY_W-1:0]        cnt_q;   // wide enough for delay and width
  logic                    tick;
  logic [DLY_W-1:0]        dly;

  assign tick = (pre_q + 1'b1 >= cfg.presc);
  assign dly  = HAS_DELAY ? cfg.delay : '0;
  assign out  = (state_q == S_PULSE) ^ cfg.polarity;

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      pre_q   <= '0;
      cnt_q   <= '0;
    end else if (trig) begin
      pre_q <= '0;
      if (dly != '0) begin
        state_q <= S_DELAY;
        cnt_q   <= dly;
      end else if (cfg.width != '0) begin
        state_q <= S_PULSE;
        cnt_q   <= DLY_W'(cfg.width);
      end else begin
        state_q <= S_IDLE;
      end
    end else if (state_q != S_IDLE) begin
      pre_q <= tick ? '0 : pre_q + 1'b1;
      if (tick) begin
        if (cnt_q != DLY_W'(1)) begin
          cnt_q <= cnt_q - 1'b1;
        end else if (state_q == S_DELAY && cfg.width != '0) begin
          state_q <= S_PULSE;
          cnt_q   <= DLY_W'(cfg.width);
        end else begin
          state_q <= S_IDLE;
        end
      end
    end
  end
endmodule
