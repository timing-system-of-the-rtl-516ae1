// Testbench of evg_event_ram at full size (2^19 x 8). Writes random codes
// to random addresses, including the first and last address, keeps its own
// copy, and reads everything back checking the one-cycle read latency.
module tb_evg_event_ram;
  localparam int AW = 19;
  logic clk = 1'b0, we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [7:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [7:0] model [int];
  int addrs [$];

  evg_event_ram #(.AW(AW), .DW(8)) dut (.*);
  always #10 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addrs.push_back(0);
    addrs.push_back(2**AW - 1);
    for (int i = 0; i < 500; i++) addrs.push_back(int'($urandom_range(2**AW - 1)));
    foreach (addrs[i]) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(addrs[i]); wdata = 8'($urandom);
      model[addrs[i]] = wdata;
    end
    @(negedge clk) we = 1'b0;
    foreach (addrs[i]) begin
      @(negedge clk) raddr = AW'(addrs[i]);
      @(posedge clk) #1;
      checks++;
      if (rdata !== model[addrs[i]]) begin
        failures++;
        $display("FAIL addr %0h read %0h expected %0h", addrs[i], rdata, model[addrs[i]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
