// Testbench of bunch_clock at the SLS numbers (h = 450 and 480, RF/10).
// Checks the event-clock period in RF cycles, the spacing of the booster
// (45 event cycles), storage-ring (48) and alignment (720) fiducials as seen
// by the event-clock domain, that alignment coincides with both revolution
// fiducials, and the release of the event-clock reset.
module tb_bunch_clock;
  logic rf_clk = 1'b0, rst = 1'b1;
  logic ev_clk, bst_rev, sr_rev, coinc, ev_rst;
  int checks = 0, failures = 0;

  bunch_clock dut (.*);

  always #1 rf_clk = ~rf_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int rf_n = 0, last_ev_rf = -1;
  always @(posedge rf_clk) rf_n++;

  int ev_n = 0, last_b = -1, last_s = -1, last_c = -1, nb = 0, ns = 0, nc = 0;
  always @(posedge ev_clk) begin
    if (last_ev_rf >= 0 && !rst) check(rf_n - last_ev_rf == 10, "event clock period 10 RF cycles");
    last_ev_rf = rf_n;
    ev_n++;
    if (bst_rev) begin
      if (last_b >= 0) check(ev_n - last_b == 45, "booster fiducial every 45 event cycles");
      last_b = ev_n; nb++;
    end
    if (sr_rev) begin
      if (last_s >= 0) check(ev_n - last_s == 48, "SR fiducial every 48 event cycles");
      last_s = ev_n; ns++;
    end
    if (coinc) begin
      check(bst_rev && sr_rev, "alignment fiducial coincides with both revolutions");
      if (last_c >= 0) check(ev_n - last_c == 720, "alignment every 720 event cycles (14.4 us)");
      last_c = ev_n; nc++;
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20) @(posedge rf_clk);
    rst <= 1'b0;
    repeat (200) @(posedge rf_clk);
    check(ev_rst == 1'b0, "event-clock reset released");
    repeat (3000) @(posedge ev_clk);
    check(nc >= 4, "alignment fiducials seen");
    check(nb == (3000 + 44) / 45 || nb == 3000 / 45 + 1 || nb == 3000 / 45, "booster fiducial count");
    $display("booster %0d sr %0d coinc %0d", nb, ns, nc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
