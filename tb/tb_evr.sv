// Testbench of the event receiver (FIFO depth 512, all 18 channels).
// Programs the decode table, sends a schedule of event codes and checks,
// cycle by cycle, every delay+width and width-only output against the rule
// "code in cycle T -> active in T+3+d*p .. T+2+(d+w)*p", the retransmitted
// stream, the timestamp reset, the FIFO entries (code and the timestamp of
// the decode cycle), the reference outputs, and that codes are ignored while
// the link is not locked.
module tb_evr;
  import evs_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  evcode_t rx_code = '0, tx_code, map_addr = '0, fifo_code;
  logic rx_locked = 1, map_we = 0, fifo_pop = 0, fifo_ovf_clr = 0;
  evr_action_t map_data = '0;
  evr_cfg_t cfg;
  logic [N_DLY-1:0] dly_out; logic [N_WID-1:0] wid_out; logic [N_REF-1:0] ref_out;
  logic [TS_W-1:0] ts, fifo_ts;
  logic fifo_empty, fifo_full, fifo_overflow;
  int checks = 0, failures = 0;

  evr dut (.*);
  always #10 clk = ~clk;

  int cyc_n = 0;
  logic [N_DLY-1:0] s_dly [int]; logic [N_WID-1:0] s_wid [int];
  logic [TS_W-1:0] s_ts [int]; evcode_t s_tx [int]; evcode_t s_rx [int];
  logic [N_REF-1:0] s_ref [int];
  always @(posedge clk) begin
    s_dly[cyc_n] = dly_out; s_wid[cyc_n] = wid_out; s_ts[cyc_n] = ts;
    s_tx[cyc_n] = tx_code; s_rx[cyc_n] = rx_locked ? rx_code : 8'h00; s_ref[cyc_n] = ref_out;
    cyc_n++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  evr_action_t tbl [256];
  int t_code [$]; evcode_t v_code [$];

  initial begin
    int t_start, t_end, ndly_act, nwid_act;
    cfg = '0;
    for (int i = 0; i < N_DLY; i++) cfg.dly[i] = '{polarity: 1'(i == 2), presc: 16'(i), delay: 24'(5 + 3*i), width: 16'(4 + i)};
    for (int i = 0; i < N_WID; i++) cfg.wid[i] = '{polarity: 1'(i == 5), presc: 16'(i % 3), delay: 24'(100), width: 16'(2 + i)};
    cfg.ref_div[0] = 16'd4; cfg.ref_div[1] = 16'd6; cfg.ref_div[2] = 16'd50;
    repeat (2) @(negedge clk);
    rst = 0;
    foreach (tbl[i]) tbl[i] = '0;
    tbl[8'h10] = '{ts_reset: 1'b0, fifo_latch: 1'b1, wid_trig: 14'h0009, dly_trig: 4'h1};
    tbl[8'h20] = '{ts_reset: 1'b1, fifo_latch: 1'b1, wid_trig: 14'h0000, dly_trig: 4'h0};
    tbl[8'h30] = '{ts_reset: 1'b0, fifo_latch: 1'b0, wid_trig: 14'h2020, dly_trig: 4'hC};
    tbl[8'h31] = '{ts_reset: 1'b0, fifo_latch: 1'b1, wid_trig: 14'h1FD6, dly_trig: 4'h2};
    for (int i = 0; i < 256; i++) begin
      @(negedge clk) begin map_we = 1; map_addr = 8'(i); map_data = tbl[i]; end
    end
    @(negedge clk) map_we = 0;
    repeat (10) @(negedge clk);
    t_start = cyc_n;
    // schedule: codes far enough apart that no channel is retriggered
    for (int k = 0; k < 24; k++) begin
      evcode_t c;
      case (k % 4) 0: c = 8'h10; 1: c = 8'h31; 2: c = 8'h30; default: c = 8'h20; endcase
      if (k == 9) rx_locked = 0;
      rx_code = c;
      t_code.push_back(cyc_n); v_code.push_back(rx_locked ? c : 8'h00);
      @(negedge clk) begin rx_code = 8'h77; end   // unmapped code in between
      @(negedge clk) rx_code = 8'h00;
      rx_locked = 1;
      repeat (60) @(negedge clk);
    end
    t_end = cyc_n;
    // expected channel outputs
    ndly_act = 0; nwid_act = 0;
    for (int c = t_start; c < t_end; c++) begin
      logic [N_DLY-1:0] ed; logic [N_WID-1:0] ew;
      ed = '0; ew = '0;
      foreach (t_code[j]) begin
        evr_action_t a;
        a = tbl[v_code[j]];
        if (v_code[j] == 0) a = '0;
        for (int i = 0; i < N_DLY; i++) if (a.dly_trig[i]) begin
          int p;
          p = (cfg.dly[i].presc == 0) ? 1 : int'(cfg.dly[i].presc);
          if (c >= t_code[j] + 3 + int'(cfg.dly[i].delay) * p && c <= t_code[j] + 2 + int'(cfg.dly[i].delay + 24'(cfg.dly[i].width)) * p) ed[i] = 1;
        end
        for (int i = 0; i < N_WID; i++) if (a.wid_trig[i]) begin
          int p;
          p = (cfg.wid[i].presc == 0) ? 1 : int'(cfg.wid[i].presc);
          if (c >= t_code[j] + 3 && c <= t_code[j] + 2 + int'(cfg.wid[i].width) * p) ew[i] = 1;
        end
      end
      ndly_act += $countones(ed); nwid_act += $countones(ew);
      for (int i = 0; i < N_DLY; i++) ed[i] ^= cfg.dly[i].polarity;
      for (int i = 0; i < N_WID; i++) ew[i] ^= cfg.wid[i].polarity;
      checks += 3;
      if (s_dly[c] !== ed) begin failures++; $display("FAIL dly cycle %0d got %b exp %b", c - t_start, s_dly[c], ed); end
      if (s_wid[c] !== ew) begin failures++; $display("FAIL wid cycle %0d got %b exp %b", c - t_start, s_wid[c], ew); end
      if (s_tx[c] !== s_rx[c - 1]) begin failures++; $display("FAIL retransmit cycle %0d", c - t_start); end
    end
    check(ndly_act > 0 && nwid_act > 0, "channels were active");
    // timestamps: +1 per cycle except right after a reset event
    foreach (t_code[j]) if (v_code[j] == 8'h20) check(s_ts[t_code[j] + 2] == 0, "timestamp 0 in the decode cycle of the reset code");
    for (int c = t_start + 1; c < t_end; c++) begin
      bit is_rst;
      is_rst = 0;
      foreach (t_code[j]) if (v_code[j] == 8'h20 && c == t_code[j] + 2) is_rst = 1;
      if (!is_rst) begin
        checks++;
        if (s_ts[c] !== s_ts[c - 1] + 1) begin failures++; $display("FAIL ts step at %0d", c - t_start); end
      end
    end
    // FIFO: one entry per latched code, in order, with the decode-cycle timestamp
    foreach (t_code[j]) if (v_code[j] != 0 && tbl[v_code[j]].fifo_latch) begin
      check(!fifo_empty, "fifo holds an entry");
      check(fifo_code == v_code[j] && fifo_ts == s_ts[t_code[j] + 2], "fifo entry code and timestamp");
      @(negedge clk) fifo_pop = 1; @(negedge clk) fifo_pop = 0;
    end
    check(fifo_empty && !fifo_overflow, "fifo drained, no overflow");
    // reference output 2: ratio 50 -> 25 high of every 50
    begin
      int hi = 0;
      for (int c = t_start; c < t_start + 500; c++) hi += s_ref[c][2];
      check(hi == 250, "reference output 50:50 duty");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
