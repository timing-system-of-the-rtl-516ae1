// Testbench of evr_refclk: three outputs with ratios 2, 7 and 10 (a
// 5 MHz output from the 50 MHz event clock); measures period and high time
// of each and checks a ratio of 1 holds the output low.
module tb_evr_refclk;
  logic clk = 1'b0, rst = 1'b1;
  logic [2:0][15:0] div;
  logic [2:0] ref_out;
  int checks = 0, failures = 0;

  evr_refclk dut (.*);
  always #10 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input int ch, input int ratio);
    int hi = 0, n = 0, rises = 0;
    logic prev;
    prev = ref_out[ch];
    for (int c = 0; c < ratio * 20; c++) begin
      @(negedge clk);
      if (ref_out[ch] && !prev) rises++;
      if (rises >= 1 && rises <= 10) begin n++; hi += ref_out[ch]; end
      prev = ref_out[ch];
    end
    checks += 2;
    if (n != ratio * 10) begin failures++; $display("FAIL ch%0d period: %0d cycles for 10 periods", ch, n); end
    if (hi != (ratio / 2) * 10) begin failures++; $display("FAIL ch%0d high time %0d", ch, hi); end
  endtask

  initial begin
    div[0] = 16'd2; div[1] = 16'd7; div[2] = 16'd10;
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (30) @(negedge clk);
    measure(0, 2);
    measure(1, 7);
    measure(2, 10);
    div[1] = 16'd1;
    repeat (20) @(negedge clk);
    for (int c = 0; c < 50; c++) begin
      @(negedge clk);
      checks++;
      if (ref_out[1] !== 1'b0) begin failures++; $display("FAIL ratio 1 not low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
