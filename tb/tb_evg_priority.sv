// Testbench of evg_priority with four sources and random requests. A
// reference picks the lowest-numbered requester; the test checks the grant
// in the same cycle and the code on the link one cycle later (0 when idle).
module tb_evg_priority;
  import evs_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst = 1'b1;
  logic [N-1:0] req_valid = '0, grant;
  evcode_t [N-1:0] req_code = '0;
  evcode_t tx_code;
  int checks = 0, failures = 0;
  evcode_t exp_tx = EV_NULL;
  int wins [N];

  evg_priority #(.NSRC(N)) dut (.*);
  always #10 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp_g;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      checks++;
      if (tx_code !== exp_tx) begin failures++; $display("FAIL tx %0h expected %0h", tx_code, exp_tx); end
      req_valid = N'($urandom);
      for (int i = 0; i < N; i++) req_code[i] = 8'($urandom_range(255, 1));
      #1;
      exp_g = '0; exp_tx = EV_NULL;
      for (int i = 0; i < N; i++) if (req_valid[i] && exp_g == '0) begin exp_g[i] = 1; exp_tx = req_code[i]; wins[i]++; end
      checks++;
      if (grant !== exp_g) begin failures++; $display("FAIL grant %b expected %b for %b", grant, exp_g, req_valid); end
    end
    $display("wins %0d %0d %0d %0d", wins[0], wins[1], wins[2], wins[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
