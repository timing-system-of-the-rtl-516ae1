// Testbench of evg_sw_event: a written code is requested until granted,
// granted exactly once, a null write is ignored, and a write while busy
// replaces the waiting code.
module tb_evg_sw_event;
  import evs_pkg::*;
  logic clk = 1'b0, rst = 1'b1, wr = 0, grant = 0, req_valid, busy;
  evcode_t wcode = '0, req_code;
  int checks = 0, failures = 0;

  evg_sw_event dut (.*);
  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic write(input evcode_t c);
    @(negedge clk) begin wr = 1; wcode = c; end
    @(negedge clk) wr = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk) check(!req_valid && !busy, "idle after reset");
    write(8'h42);
    check(req_valid && busy && req_code == 8'h42, "code requested after write");
    repeat (5) @(negedge clk);
    check(req_valid && req_code == 8'h42, "held while not granted");
    grant = 1; @(negedge clk) grant = 0;
    check(!req_valid && !busy, "released after one grant");
    write(8'h00);
    check(!req_valid, "null write ignored");
    write(8'h10);
    write(8'h20);
    check(req_valid && req_code == 8'h20, "write while busy replaces the code");
    grant = 1; @(negedge clk) grant = 0;
    check(!busy, "sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
