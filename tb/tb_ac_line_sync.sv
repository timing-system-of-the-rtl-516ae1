// Testbench of ac_line_sync with the default divide-by-16. Drives an
// asynchronous mains square wave and a periodic alignment fiducial, and
// checks that exactly one start pulse follows every 16th mains edge, on the
// first fiducial after it, one cycle late.
module tb_ac_line_sync;
  logic clk = 1'b0, rst = 1'b1, mains = 1'b0, coinc = 1'b0;
  logic start;
  int checks = 0, failures = 0;

  ac_line_sync dut (.*);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // fiducial every 72 cycles
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    coinc <= (cyc % 72 == 0);
  end

  // mains: period 1537 ns (not a multiple of the clock)
  initial forever begin #768 mains = ~mains; end

  // reference model: count synchronised rising edges ourselves
  int edges = 0, expected_starts = 0, starts = 0;
  logic m1, m2, m3;
  bit   armed = 0, coinc_d = 0;
  always @(posedge clk) begin
    if (!rst) begin
      check(start == (armed && coinc_d), "start on the first fiducial after the 16th edge");
      if (armed && coinc_d) armed = 0;
      if (m2 && !m3) begin
        edges++;
        if (edges % 16 == 0) begin armed = 1; expected_starts++; end
      end
      if (start) starts++;
    end
    coinc_d = coinc;
    m3 = m2; m2 = m1; m1 = mains;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m1 = 0; m2 = 0; m3 = 0;
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    repeat (40000) @(posedge clk);
    check(starts >= 20, "enough start pulses");
    check(starts >= expected_starts - 1 && starts <= expected_starts, "one start per 16 mains cycles");
    $display("mains edges %0d starts %0d", edges, starts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
