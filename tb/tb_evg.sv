// Testbench of the event generator (RAM address width reduced to 10 bits).
// Loads both event RAMs through the host port, starts sequence 0 from the
// external trigger and sequence 1 from a host strobe in the same cycle, and
// adds a software event and an upstream stream. A reference model built from
// the published rules (one code per 20 ns slot, upstream > RAM 0 > RAM 1 >
// software, a waiting code goes out in the next free slot) predicts the
// whole transmitted stream, slot by slot; the test compares it and counts
// how often a code had to wait for a slot.
module tb_evg;
  import evs_pkg::*;
  localparam int AW = 10;
  logic clk = 1'b0, rst = 1'b1;
  logic ext_trig = 0, ext_clk = 0;
  evcode_t up_code = '0;
  evg_seq_cfg_t [1:0] seq_cfg;
  logic [1:0] seq_arm = '0, seq_sw_start = '0;
  logic ram_we = 0; logic ram_sel = 0; logic [AW-1:0] ram_waddr = '0; evcode_t ram_wdata = '0;
  logic sw_wr = 0; evcode_t sw_code = '0;
  evcode_t tx_code;
  logic [1:0] seq_running, seq_armed, seq_overflow; logic sw_busy;
  int checks = 0, failures = 0;

  evg #(.NSEQ(2), .AW(AW)) dut (.*);
  always #10 clk = ~clk;

  evcode_t ram0 [2**AW], ram1 [2**AW];
  // reference: per cycle, which code each source offers for the first time
  evcode_t offer [4][int];
  evcode_t exp_tx [int];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input bit sel, input int a, input evcode_t c);
    @(negedge clk) begin ram_we = 1; ram_sel = sel; ram_waddr = AW'(a); ram_wdata = c; end
    @(negedge clk) ram_we = 0;
  endtask

  int t0 = 0, waited = 0;
  evcode_t seen [int];
  int cyc_n = 0;
  // cycle numbering: cyc_n is the index of the current cycle; tx_code sampled
  // at the end of a cycle is the code sent in that cycle
  always @(posedge clk) begin seen[cyc_n] = tx_code; cyc_n++; end

  initial begin
    seq_cfg[0] = '{enable: 1'b1, single: 1'b0, trig_en: 1'b1, ext_clk: 1'b0, div: 16'd3, end_addr: 19'd20};
    seq_cfg[1] = '{enable: 1'b1, single: 1'b0, trig_en: 1'b0, ext_clk: 1'b0, div: 16'd3, end_addr: 19'd20};
    repeat (3) @(negedge clk);
    rst = 0;
    foreach (ram0[i]) begin ram0[i] = EV_NULL; ram1[i] = EV_NULL; end
    for (int a = 0; a <= 21; a++) begin
      ram0[a] = (a % 2 == 0) ? 8'(8'h10 + a) : EV_NULL;
      ram1[a] = (a % 3 == 0) ? 8'(8'h80 + a) : EV_NULL;
      load(0, a, ram0[a]);
      load(1, a, ram1[a]);
    end
    // start both sequences in the same cycle (trigger high during cycle t0)
    @(negedge clk) begin ext_trig = 1; seq_sw_start[1] = 1; t0 = cyc_n; end
    @(negedge clk) begin ext_trig = 0; seq_sw_start[1] = 0; end
    for (int a = 0; a <= 20; a++) begin
      if (ram0[a] != 0) offer[1][t0 + 3 + a*3] = ram0[a];
      if (ram1[a] != 0) offer[2][t0 + 3 + a*3] = ram1[a];
    end
    // software event (requested the cycle after the write) and upstream codes
    // (requested in the cycle they are present)
    repeat (2) @(negedge clk);
    sw_wr = 1; sw_code = 8'h5C; offer[3][cyc_n + 1] = 8'h5C;
    @(negedge clk) sw_wr = 0;
    repeat (3) @(negedge clk);
    up_code = 8'hE1; offer[0][cyc_n] = 8'hE1;
    @(negedge clk) up_code = 0;
    repeat (2) @(negedge clk);
    up_code = 8'hE2; offer[0][cyc_n] = 8'hE2;
    @(negedge clk) up_code = 0;
    repeat (100) @(negedge clk);
    // expected stream: each cycle the highest-priority waiting code is chosen
    // and is on the link the next cycle
    begin
      evcode_t q [4][$];
      for (int c = t0; c < t0 + 100; c++) begin
        int s;
        for (int i = 0; i < 4; i++) if (offer[i].exists(c)) q[i].push_back(offer[i][c]);
        s = -1;
        for (int i = 3; i >= 0; i--) if (q[i].size() > 0) s = i;
        if (s >= 0) begin
          exp_tx[c + 1] = q[s].pop_front();
          for (int i = 0; i < 4; i++) if (i != s && q[i].size() > 0) waited++;
        end
      end
    end
    for (int c = t0; c < t0 + 100; c++) begin
      evcode_t e;
      e = exp_tx.exists(c) ? exp_tx[c] : EV_NULL;
      checks++;
      if (seen[c] !== e) begin failures++; $display("FAIL cycle %0d tx %0h expected %0h", c - t0, seen[c], e); end
    end
    checks++;
    if (seq_overflow != 2'b00) begin failures++; $display("FAIL overflow"); end
    $display("codes that waited for a slot: %0d", waited);
    checks++;
    if (waited == 0) begin failures++; $display("FAIL no contention exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
