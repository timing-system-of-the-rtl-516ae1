// Testbench of evr_map: writes all 256 entries with random actions, then
// feeds random codes and checks that one cycle later the action is the
// entry of that code (none for code 0) and act_code is the code.
module tb_evr_map;
  import evs_pkg::*;
  logic clk = 1'b0, rst = 1'b1, we = 0;
  evcode_t waddr = '0, code = '0, act_code;
  evr_action_t wdata = '0, act;
  evr_action_t model [256];
  int checks = 0, failures = 0;

  evr_map dut (.*);
  always #10 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    evcode_t prev;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 256; i++) begin
      model[i] = evr_action_t'($urandom);
      @(negedge clk) begin we = 1; waddr = 8'(i); wdata = model[i]; end
    end
    @(negedge clk) we = 0;
    prev = '0;
    for (int k = 0; k < 1000; k++) begin
      code = (k % 10 == 0) ? 8'h00 : 8'($urandom);
      @(negedge clk);
      checks++;
      if (act !== ((code == 0) ? evr_action_t'(0) : model[code]) || act_code !== code) begin
        failures++; $display("FAIL code %0h act %0h expected %0h", code, act, model[code]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
