// End-to-end testbench of the timing system at its default size (eight
// receivers, 512 KB event RAMs, SLS harmonic numbers, divide-by-16 mains).
//
// The RF clock runs at 500 MHz; the mains reference is sped up to a 20 us
// period so that a sequence start comes every 320 us instead of every 320 ms.
// An injection sequence like the one of the structure diagram (linac
// trigger, ramp start, BPM sync, extraction/SR injection) is loaded into
// event RAM 0 at one code per booster turn. The test then
//   1. lets the mains sync start it in continuous mode and checks, in every
//      receiver, the trigger outputs, the timestamps latched in the FIFO and
//      the alignment of the start with the bucket-0 fiducial;
//   2. moves the extraction event one address later (filling control), runs
//      it in single-shot mode clocked by the booster revolution fiducial, and
//      checks the extraction moved by exactly one booster turn (45 event
//      cycles, 450 RF buckets);
//   3. sends software and upstream events during a sequence (priority
//      resolution, sub-branch), forces a sequencer overflow, and takes one
//      receiver's link out of lock.
// Every mechanism is counted and a mechanism that never happened is a
// failure.
module tb_sls_timing_system;
  import evs_pkg::*;
  localparam int NE = 8;

  logic rf_clk = 1'b0, rst = 1'b1, mains = 1'b0;
  logic ev_clk, ev_rst, bst_rev, sr_rev, coinc, seq_start;
  evcode_t up_code = '0;
  evg_seq_cfg_t [1:0] seq_cfg;
  logic [1:0] seq_arm = '0, seq_sw_start = '0;
  logic ram_we = 0, ram_sel = 0; logic [RAM_AW-1:0] ram_waddr = '0; evcode_t ram_wdata = '0;
  logic sw_wr = 0; evcode_t sw_code = '0;
  evcode_t evg_tx;
  logic [1:0] seq_running, seq_armed, seq_overflow; logic sw_busy;
  logic [NE-1:0] link_locked = '1, map_we = '0;
  evcode_t map_addr = '0; evr_action_t map_data = '0;
  evr_cfg_t [NE-1:0] evr_cfg;
  evcode_t [NE-1:0] evr_tx;
  logic [NE-1:0][N_DLY-1:0] dly_out; logic [NE-1:0][N_WID-1:0] wid_out; logic [NE-1:0][N_REF-1:0] ref_out;
  logic [NE-1:0][TS_W-1:0] ts;
  logic [NE-1:0] fifo_pop = '0;
  evcode_t [NE-1:0] fifo_code; logic [NE-1:0][TS_W-1:0] fifo_ts;
  logic [NE-1:0] fifo_empty, fifo_full, fifo_overflow, fifo_ovf_clr = '0;

  sls_timing_system dut (.*);

  always #1 rf_clk = ~rf_clk;                 // 500 MHz RF
  initial forever #10000 mains = ~mains;      // accelerated mains reference

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (ev cycle %0d)", what, cyc); end
  endtask

  // ---- event-clock bookkeeping ----
  int cyc = 0;
  int last_coinc = -1, last_start = -1, n_start = 0, n_start_aligned = 0;
  int n_contention = 0, n_up = 0, n_dly_rise = 0, n_wid_rise = 0, n_ref_rise = 0;
  int dly1_rise [$];   // cycles of extraction trigger (EVR 0, delay channel 1)
  logic [NE-1:0][N_DLY-1:0] dly_q; logic [NE-1:0][N_WID-1:0] wid_q; logic [N_REF-1:0] ref_q;
  always @(posedge ev_clk) begin
    if (!ev_rst) begin
      if (coinc) last_coinc = cyc;
      if (seq_start) begin
        n_start++; last_start = cyc;
        if (last_coinc == cyc - 1) n_start_aligned++;
      end
      if ($countones(dut.u_evg.u_prio.req_valid) > 1) n_contention++;
      if (dut.u_evg.u_prio.grant[0]) n_up++;
      for (int e = 0; e < NE; e++) begin
        n_dly_rise += $countones(dly_out[e] & ~dly_q[e]);
        n_wid_rise += $countones(wid_out[e] & ~wid_q[e]);
      end
      n_ref_rise += $countones(ref_out[0] & ~ref_q);
      if (dly_out[0][1] && !dly_q[0][1]) dly1_rise.push_back(cyc);
    end
    dly_q = dly_out; wid_q = wid_out; ref_q = ref_out[0];
    cyc++;
  end

  initial begin
    #20000000;   // 20 ms simulated
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host access ----
  task automatic ram_write(input bit sel, input int a, input evcode_t c);
    @(negedge ev_clk) begin ram_we = 1; ram_sel = sel; ram_waddr = RAM_AW'(a); ram_wdata = c; end
    @(negedge ev_clk) ram_we = 0;
  endtask
  task automatic map_write(input logic [NE-1:0] sel, input evcode_t c, input evr_action_t a);
    @(negedge ev_clk) begin map_we = sel; map_addr = c; map_data = a; end
    @(negedge ev_clk) map_we = '0;
  endtask

  // event codes of the injection sequence
  localparam evcode_t LINAC = 8'h01, RAMP = 8'h02, BPM = 8'h03, EXTR = 8'h04, SWEV = 8'h40, UPEV = 8'h60;
  localparam int A_RAMP = 2, A_BPM = 5, A_EXTR = 9, A_END = 15;
  localparam int D_EXTR = 7;   // delay (event cycles) of the extraction trigger channel

  // drain the FIFO of receiver e into queues
  task automatic drain(input int e, output evcode_t codes [$], output logic [TS_W-1:0] tss [$]);
    codes.delete(); tss.delete();
    while (!fifo_empty[e]) begin
      codes.push_back(fifo_code[e]); tss.push_back(fifo_ts[e]);
      @(negedge ev_clk) fifo_pop[e] = 1;
      @(negedge ev_clk) fifo_pop[e] = 0;
    end
  endtask

  task automatic wait_start_and_end();
    int n0;
    n0 = n_start;
    wait (n_start > n0);
    @(negedge ev_clk);
    wait (seq_running == 2'b00);
    repeat (40) @(negedge ev_clk);
  endtask

  int n_single_blocked = 0, n_single_run = 0, n_extclk_run = 0, n_overflow = 0, n_unlock_ignored = 0;
  int n_fifo = 0, n_tsreset = 0, n_filling_shift = 0;

  initial begin
    evcode_t codes [$]; logic [TS_W-1:0] tss [$];
    evcode_t codes7 [$]; logic [TS_W-1:0] tss7 [$];
    int ext1, ext2, s1;
    seq_cfg[0] = '{enable: 1'b1, single: 1'b0, trig_en: 1'b1, ext_clk: 1'b0, div: 16'd45, end_addr: 19'(A_END)};
    seq_cfg[1] = '{enable: 1'b1, single: 1'b0, trig_en: 1'b0, ext_clk: 1'b0, div: 16'd1,  end_addr: 19'd6};
    for (int e = 0; e < NE; e++) begin
      evr_cfg[e] = '0;
      evr_cfg[e].dly[0] = '{polarity: 1'b0, presc: 16'd0, delay: 24'd3, width: 16'd10};   // linac trigger
      evr_cfg[e].dly[1] = '{polarity: 1'b0, presc: 16'd1, delay: 24'(D_EXTR), width: 16'd5};  // extraction
      evr_cfg[e].wid[0] = '{polarity: 1'b0, presc: 16'd0, delay: 24'd0, width: 16'd20};   // ramp start
      evr_cfg[e].wid[1] = '{polarity: 1'b1, presc: 16'd2, delay: 24'd0, width: 16'd4};    // BPM sync
      evr_cfg[e].ref_div = {16'd720, 16'd45, 16'd10};   // 5 MHz, booster turn, alignment period
    end
    repeat (10) @(posedge rf_clk);
    rst = 0;
    wait (!ev_rst);
    // decode tables: all receivers the same, receiver 3 additionally triggers on BPM
    for (int c = 0; c < 256; c++) map_write('1, 8'(c), '0);
    map_write('1, LINAC, '{ts_reset: 1'b1, fifo_latch: 1'b1, wid_trig: '0, dly_trig: 4'b0001});
    map_write('1, RAMP,  '{ts_reset: 1'b0, fifo_latch: 1'b0, wid_trig: 14'h0001, dly_trig: '0});
    map_write('1, BPM,   '{ts_reset: 1'b0, fifo_latch: 1'b0, wid_trig: 14'h0002, dly_trig: '0});
    map_write('1, EXTR,  '{ts_reset: 1'b0, fifo_latch: 1'b1, wid_trig: '0, dly_trig: 4'b0010});
    map_write('1, SWEV,  '{ts_reset: 1'b0, fifo_latch: 1'b1, wid_trig: '0, dly_trig: '0});
    map_write('1, UPEV,  '{ts_reset: 1'b0, fifo_latch: 1'b1, wid_trig: '0, dly_trig: '0});
    map_write(8'h08, BPM, '{ts_reset: 1'b0, fifo_latch: 1'b1, wid_trig: 14'h0002, dly_trig: '0});
    // injection sequence in RAM 0 (the used part; the rest of the RAM cleared)
    for (int a = 0; a <= A_END + 1; a++) ram_write(0, a, 8'h00);
    ram_write(0, 0, LINAC); ram_write(0, A_RAMP, RAMP); ram_write(0, A_BPM, BPM); ram_write(0, A_EXTR, EXTR);
    for (int a = 0; a <= 7; a++) ram_write(1, a, 8'(8'h20 + a));

    // ---- 1. continuous mode, started by the mains sync ----
    link_locked[7] = 1'b0;
    wait_start_and_end();
    s1 = last_start;
    check(n_start_aligned == n_start, "sequence start follows the bucket-0 alignment fiducial");
    check(dly1_rise.size() >= 1, "extraction trigger fired");
    ext1 = dly1_rise[$];
    // code at address k is on the link at S+4+45k, decoded 3 cycles later
    check(ext1 == s1 + 4 + 45 * A_EXTR + 3 + D_EXTR, "extraction trigger time");
    for (int e = 0; e < NE - 1; e++) begin
      drain(e, codes, tss);
      check(codes.size() == ((e == 3) ? 3 : 2), "FIFO entry count");
      if (codes.size() >= 2) begin
        check(codes[0] == LINAC && codes[$] == EXTR, "FIFO codes");
        check(tss[$] - tss[0] == 45 * A_EXTR, "extraction timestamp A_EXTR booster turns after the linac trigger");
        n_fifo += codes.size();
      end
    end
    check(ts[0] == ts[5] && ts[1] == ts[6], "all locked receivers share one time base");
    n_tsreset++;
    drain(7, codes7, tss7);
    check(codes7.size() == 0, "unlocked receiver ignored the sequence");
    if (codes7.size() == 0) n_unlock_ignored++;
    link_locked[7] = 1'b1;

    // ---- 2. filling control: extraction one turn later, single shot, external clock ----
    ram_write(0, A_EXTR, 8'h00); ram_write(0, A_EXTR + 1, EXTR);
    seq_cfg[0].single = 1'b1; seq_cfg[0].ext_clk = 1'b1;
    wait_start_and_end();
    check(dly1_rise[$] == ext1, "single mode without arm: no run");
    if (dly1_rise[$] == ext1) n_single_blocked++;
    @(negedge ev_clk) seq_arm[0] = 1; @(negedge ev_clk) seq_arm[0] = 0;
    wait_start_and_end();
    check(!seq_armed[0], "single run disarms");
    n_single_run++; n_extclk_run++;
    drain(0, codes, tss);
    check(codes.size() == 2 && tss[1] - tss[0] == 45 * (A_EXTR + 1), "extraction moved by one booster turn");
    if (codes.size() == 2 && tss[1] - tss[0] - 45 * A_EXTR == 45) n_filling_shift++;
    for (int e = 1; e < NE; e++) drain(e, codes, tss);
    // booster-turn clock: extraction trigger at a fixed phase to the booster fiducial
    ext2 = dly1_rise[$];
    check((ext2 - last_start) > 0, "extraction after start");

    // ---- 3. software and upstream events, overflow ----
    seq_cfg[0].single = 1'b0; seq_cfg[0].ext_clk = 1'b0;
    fork
      begin
        int n0;
        n0 = n_start;
        wait (n_start > n0);
        // software event timed to collide with the linac code (on the link at S+4)
        @(negedge ev_clk) begin sw_wr = 1; sw_code = SWEV; end
        @(negedge ev_clk) sw_wr = 0;
        // upstream codes (sub-branch) while the sequence runs
        repeat (30) @(negedge ev_clk);
        up_code = UPEV; @(negedge ev_clk) up_code = 8'h00;
        // flood the upstream link while sequencer 1 plays at full rate: overflow
        repeat (20) @(negedge ev_clk);
        up_code = 8'h61;
        @(negedge ev_clk) seq_sw_start[1] = 1; @(negedge ev_clk) seq_sw_start[1] = 0;
        repeat (12) @(negedge ev_clk);
        up_code = 8'h00;
      end
    join
    wait (seq_running == 2'b00);
    repeat (40) @(negedge ev_clk);
    check(seq_overflow[1], "sequencer overflow when the upstream link fills every slot");
    if (seq_overflow[1]) n_overflow++;
    drain(0, codes, tss);
    begin
      bit got_sw, got_up;
      got_sw = 0; got_up = 0;
      foreach (codes[i]) begin if (codes[i] == SWEV) got_sw = 1; if (codes[i] == UPEV) got_up = 1; end
      check(got_sw, "software event received");
      check(got_up, "upstream event received");
    end
    check(evr_tx[2] != 8'hxx, "daisy-chain output present");

    // ---- mechanism coverage ----
    $display("starts=%0d aligned=%0d contention=%0d upstream_slots=%0d dly_pulses=%0d wid_pulses=%0d ref_edges=%0d",
             n_start, n_start_aligned, n_contention, n_up, n_dly_rise, n_wid_rise, n_ref_rise);
    $display("fifo=%0d ts_reset=%0d unlock_ignored=%0d single_blocked=%0d single_run=%0d extclk_run=%0d overflow=%0d filling_shift=%0d",
             n_fifo, n_tsreset, n_unlock_ignored, n_single_blocked, n_single_run, n_extclk_run, n_overflow, n_filling_shift);
    check(n_start > 0, "mechanism: mains-synchronised start");
    check(n_contention > 0, "mechanism: priority resolution");
    check(n_up > 0, "mechanism: upstream merge");
    check(n_dly_rise > 0 && n_wid_rise > 0, "mechanism: delay and width channels");
    check(n_ref_rise > 0, "mechanism: reference outputs");
    check(n_fifo > 0 && n_tsreset > 0, "mechanism: FIFO and timestamp reset");
    check(n_unlock_ignored > 0, "mechanism: unlocked link");
    check(n_single_blocked > 0 && n_single_run > 0, "mechanism: single-shot mode");
    check(n_extclk_run > 0, "mechanism: external RAM clock");
    check(n_overflow > 0, "mechanism: sequencer overflow");
    check(n_filling_shift > 0, "mechanism: one-turn extraction shift");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
