// Testbench of evr_timestamp: counts one per cycle from reset, reads 0
// in the cycle of a reset event (1 in the next), and wraps at its width (reduced to 8 bits in
// a second instance).
module tb_evr_timestamp;
  logic clk = 1'b0, rst = 1'b1, ts_reset = 0;
  logic [31:0] ts;
  logic [7:0] ts8;
  int checks = 0, failures = 0;

  evr_timestamp dut (.clk, .rst, .ts_reset, .ts);
  evr_timestamp #(.W(8)) dut8 (.clk, .rst, .ts_reset(1'b0), .ts(ts8));
  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s ts=%0d", what, ts); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk) check(ts == 1, "counts from reset");
    repeat (99) @(negedge clk);
    check(ts == 100, "100 cycles");
    ts_reset = 1; #1;
    check(ts == 0, "reads 0 in the reset cycle");
    @(negedge clk) ts_reset = 0;
    #1;
    check(ts == 1, "1 in the cycle after the reset event");
    repeat (37) @(negedge clk);
    check(ts == 38, "counts after clear");
    repeat (300) @(negedge clk);
    check(ts8 == 8'(438), "8-bit counter wraps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
