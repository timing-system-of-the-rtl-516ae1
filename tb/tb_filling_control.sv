// Workload testbench: filling control through the whole timing system at its
// default size.
//
// The booster (450 buckets) and the storage ring (480 buckets) drift by 30
// buckets per booster turn and realign after 16 turns. Moving the extraction
// event in the event RAM by one address (one booster turn) therefore moves
// the storage-ring bucket that receives the beam by 30 buckets; the linac gun
// delay (outside this design) selects the bucket inside a 30-bucket group.
// The test runs 16 mains-synchronised injection cycles with the extraction
// event at addresses A0 .. A0+15 and reads the bunch clock's bucket counters
// at the rising edge of the extraction trigger in receiver 0. It checks that
// the trigger always sits at the same booster bucket, that the storage-ring
// bucket steps by -30 (mod 480) per address, and that the 16 positions hit 16
// different 30-bucket groups.
module tb_filling_control;
  import evs_pkg::*;
  localparam int NE = 8;
  localparam int A0 = 20;
  localparam evcode_t EXTR = 8'h04;

  logic rf_clk = 1'b0, rst = 1'b1, mains = 1'b0;
  logic ev_clk, ev_rst, bst_rev, sr_rev, coinc, seq_start;
  evg_seq_cfg_t [1:0] seq_cfg;
  logic ram_we = 0, ram_sel = 0; logic [RAM_AW-1:0] ram_waddr = '0; evcode_t ram_wdata = '0;
  logic [NE-1:0] map_we = '0;
  evcode_t map_addr = '0; evr_action_t map_data = '0;
  evr_cfg_t [NE-1:0] evr_cfg;
  logic [NE-1:0][N_DLY-1:0] dly_out;
  logic [1:0] seq_running;

  sls_timing_system dut (
    .rf_clk, .rst, .mains, .ev_clk, .ev_rst, .bst_rev, .sr_rev, .coinc, .seq_start,
    .up_code(8'h00), .seq_cfg, .seq_arm(2'b00), .seq_sw_start(2'b00),
    .ram_we, .ram_sel, .ram_waddr, .ram_wdata, .sw_wr(1'b0), .sw_code(8'h00),
    .evg_tx(), .seq_running, .seq_armed(), .seq_overflow(), .sw_busy(),
    .link_locked('1), .map_we, .map_addr, .map_data, .evr_cfg, .evr_tx(),
    .dly_out, .wid_out(), .ref_out(), .ts(), .fifo_pop('0), .fifo_code(), .fifo_ts(),
    .fifo_empty(), .fifo_full(), .fifo_overflow(), .fifo_ovf_clr('0)
  );

  always #1 rf_clk = ~rf_clk;
  initial forever #10000 mains = ~mains;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int b_at [$], s_at [$];
  logic q = 0;
  always @(posedge ev_clk) begin
    if (!ev_rst && dly_out[0][0] && !q) begin
      b_at.push_back(int'(dut.u_bunch.b_q)); s_at.push_back(int'(dut.u_bunch.s_q));
    end
    q = dly_out[0][0];
  end

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ram_write(input int a, input evcode_t c);
    @(negedge ev_clk) begin ram_we = 1; ram_sel = 0; ram_waddr = RAM_AW'(a); ram_wdata = c; end
    @(negedge ev_clk) ram_we = 0;
  endtask

  initial begin
    bit [15:0] groups;
    seq_cfg[0] = '{enable: 1'b1, single: 1'b0, trig_en: 1'b1, ext_clk: 1'b0, div: 16'd45, end_addr: 19'(A0 + 16)};
    seq_cfg[1] = '0;
    for (int e = 0; e < NE; e++) begin
      evr_cfg[e] = '0;
      evr_cfg[e].dly[0] = '{polarity: 1'b0, presc: 16'd0, delay: 24'd12, width: 16'd3};
    end
    repeat (10) @(posedge rf_clk);
    rst = 0;
    wait (!ev_rst);
    for (int c = 0; c < 256; c++) begin
      @(negedge ev_clk) begin map_we = '1; map_addr = 8'(c); map_data = '0; if (8'(c) == EXTR) map_data.dly_trig = 4'b0001; end
    end
    @(negedge ev_clk) map_we = '0;
    for (int a = 0; a <= A0 + 17; a++) ram_write(a, 8'h00);
    for (int n = 0; n < 16; n++) begin
      int k;
      if (n > 0) ram_write(A0 + n - 1, 8'h00);
      ram_write(A0 + n, EXTR);
      k = b_at.size();
      wait (seq_start);
      repeat (2) @(negedge ev_clk);
      wait (seq_running == 2'b00);
      repeat (40) @(negedge ev_clk);
      check(b_at.size() == k + 1, "one extraction trigger per cycle");
    end
    groups = '0;
    for (int n = 0; n < b_at.size(); n++) begin
      int ds;
      check(b_at[n] == b_at[0], "extraction at the same booster bucket every time");
      ds = ((s_at[n] - s_at[0]) % 480 + 480) % 480;
      check(ds == ((-30 * n) % 480 + 480) % 480, $sformatf("storage-ring bucket steps by 30 (shift %0d: %0d)", n, ds));
      groups[ds / 30] = 1'b1;
    end
    check(b_at.size() == 16 && groups == 16'hFFFF, "16 extraction positions reach all 16 groups of 30 buckets");
    $display("booster bucket %0d, storage-ring buckets:", b_at[0]);
    foreach (s_at[i]) $write(" %0d", s_at[i]);
    $display("");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
