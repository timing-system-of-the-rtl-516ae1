// Workload testbench: one complete 320 ms SLS injection cycle with 20
// events, through the generator at its default size and two receivers.
//
// The event RAM is cleared over the 355,556 booster turns of a 320 ms cycle
// and loaded with 20 events spread over it (one RAM address per booster turn,
// internal RAM clock of 45 event cycles = 900 ns). The first event resets the
// receivers' timestamps. The sequence is started twice. The
// test checks that every event is received by both receivers at the exact
// time (address x 45 event cycles after the first), that the sequence ends
// within the 320 ms (16,000,000 event cycles) before the next cycle, and that
// a second start plays it again.
module tb_injection_cycle;
  import evs_pkg::*;
  localparam int TURNS = 355555;          // whole booster turns in 320 ms (16,000,000 / 45)
  localparam int NEV   = 20;
  logic clk = 1'b0, rst = 1'b1;
  logic ext_trig = 0;
  evg_seq_cfg_t [1:0] seq_cfg;
  logic ram_we = 0; logic ram_sel = 0; logic [RAM_AW-1:0] ram_waddr = '0; evcode_t ram_wdata = '0;
  evcode_t tx_code;
  logic [1:0] seq_running, seq_armed, seq_overflow; logic sw_busy;
  int checks = 0, failures = 0;

  evg u_evg (.clk, .rst, .ext_trig, .ext_clk(1'b0), .up_code(8'h00), .seq_cfg, .seq_arm(2'b00),
             .seq_sw_start(2'b00), .ram_we, .ram_sel, .ram_waddr, .ram_wdata, .sw_wr(1'b0),
             .sw_code(8'h00), .tx_code, .seq_running, .seq_armed, .seq_overflow, .sw_busy);

  evcode_t fifo_code [2]; logic [TS_W-1:0] fifo_ts [2]; logic [1:0] fifo_empty, fifo_pop;
  logic map_we = 0; evcode_t map_addr = '0; evr_action_t map_data = '0;
  evr_cfg_t cfg;
  for (genvar e = 0; e < 2; e++) begin : g_evr
    evr u_evr (.clk, .rst, .rx_code(tx_code), .rx_locked(1'b1), .tx_code(),
               .map_we, .map_addr, .map_data, .cfg, .dly_out(), .wid_out(), .ref_out(), .ts(),
               .fifo_pop(fifo_pop[e]), .fifo_code(fifo_code[e]), .fifo_ts(fifo_ts[e]),
               .fifo_empty(fifo_empty[e]), .fifo_full(), .fifo_overflow(), .fifo_ovf_clr(1'b0));
  end

  always #10 clk = ~clk;

  initial begin
    #800000000;   // 800 ms
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int addr [NEV];
  evcode_t code [NEV];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic drain_and_check(input int cyc_no);
    for (int e = 0; e < 2; e++) begin
      for (int k = 0; k < NEV; k++) begin
        check(!fifo_empty[e], "event received");
        check(fifo_code[e] == code[k], "event order");
        check(fifo_ts[e] == 32'(45 * addr[k]), $sformatf("cycle %0d event %0d at turn %0d", cyc_no, k, addr[k]));
        @(negedge clk) fifo_pop[e] = 1; @(negedge clk) fifo_pop[e] = 0;
      end
      check(fifo_empty[e], "no extra events");
    end
  endtask

  initial begin
    fifo_pop = '0;
    cfg = '0;
    seq_cfg[0] = '{enable: 1'b1, single: 1'b0, trig_en: 1'b1, ext_clk: 1'b0, div: 16'd45, end_addr: 19'(TURNS - 1)};
    seq_cfg[1] = '0;
    for (int k = 0; k < NEV; k++) begin
      addr[k] = (k == 0) ? 0 : (k == NEV - 1) ? TURNS - 1 : k * 17000 + int'($urandom_range(16000));
      code[k] = 8'(k + 1);
    end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 256; c++) begin
      @(negedge clk) begin map_we = 1; map_addr = 8'(c); map_data = '0;
        if (c >= 1 && c <= NEV) map_data.fifo_latch = 1'b1;
        if (c == 1) map_data.ts_reset = 1'b1;
      end
    end
    @(negedge clk) map_we = 0;
    // clear the RAM over the cycle length, then place the events
    ram_we = 1;
    for (int a = 0; a <= TURNS; a++) begin ram_waddr = RAM_AW'(a); ram_wdata = 8'h00; @(negedge clk); end
    for (int k = 0; k < NEV; k++) begin ram_waddr = RAM_AW'(addr[k]); ram_wdata = code[k]; @(negedge clk); end
    ram_we = 0;
    for (int n = 1; n <= 2; n++) begin
      ext_trig = 1; @(negedge clk) ext_trig = 0;
      // last address read at 1 + 45*(TURNS-1) = 15,999,931 cycles after the trigger
      repeat (45 * (TURNS - 1)) @(negedge clk);
      check(seq_running[0] == 1'b1, "still running at the last turn");
      repeat (14) @(negedge clk);
      check(seq_running[0] == 1'b0, "sequence ended within 320 ms (16,000,000 event cycles)");
      check(!seq_overflow[0], "no event lost");
      drain_and_check(n);
      repeat (100) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
