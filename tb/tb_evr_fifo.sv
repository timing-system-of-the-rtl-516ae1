// Testbench of evr_fifo (depth reduced to 16): random pushes and pops
// against a queue model, data order, empty flag, and the overflow rule (a
// push into a full FIFO is dropped and flagged until cleared).
module tb_evr_fifo;
  import evs_pkg::*;
  localparam int D = 16;
  logic clk = 1'b0, rst = 1'b1, push = 0, pop = 0, ovf_clr = 0;
  evcode_t push_code = '0, dout_code;
  logic [31:0] push_ts = '0, dout_ts;
  logic empty, full, overflow;
  int checks = 0, failures = 0;
  logic [39:0] q [$];
  bit exp_ovf = 0;
  int n_ovf = 0;

  evr_fifo #(.DEPTH(D)) dut (.*);
  always #10 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 3000; k++) begin
      // check visible state
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == D) || overflow !== exp_ovf) begin
        failures++; $display("FAIL flags empty=%b full=%b ovf=%b size=%0d", empty, full, overflow, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if ({dout_code, dout_ts} !== q[0]) begin failures++; $display("FAIL data %0h expected %0h", {dout_code, dout_ts}, q[0]); end
      end
      // drive: bursts of pushes, then bursts of pops
      push = ((k / 200) % 2 == 0) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      pop  = ((k / 200) % 2 == 0) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      ovf_clr = (k % 97 == 0);
      push_code = 8'($urandom); push_ts = $urandom;
      begin
        bit was_full, was_empty;
        was_full = (q.size() == D); was_empty = (q.size() == 0);
        @(negedge clk);
        if (pop && !was_empty) void'(q.pop_front());
        if (push && !was_full) q.push_back({push_code, push_ts});
        if (push && was_full) begin exp_ovf = 1; n_ovf++; end
        else if (ovf_clr) exp_ovf = 0;
      end
    end
    checks++;
    if (n_ovf == 0) begin failures++; $display("FAIL overflow never exercised"); end
    $display("dropped pushes: %0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
