// Testbench of evg_sequencer with a small RAM model (AW = 8). It plays a
// sequence in continuous mode with the internal RAM clock and checks every
// code and the cycle it is requested (trigger + 3 + k*div); then the external
// clock mode, single-shot mode (no run without arm, one run per arm), a
// trigger during a run, and the overflow when the grant is held back.
module tb_evg_sequencer;
  import evs_pkg::*;
  localparam int AW = 8;
  logic clk = 1'b0, rst = 1'b1;
  evg_seq_cfg_t cfg;
  logic trig = 0, arm = 0, ext_tick = 0, grant;
  logic [AW-1:0] raddr;
  evcode_t rdata, req_code;
  logic req_valid, running, armed, overflow;
  bit hold_grant = 0;
  int checks = 0, failures = 0;
  evcode_t ram [2**AW];
  int cyc = 0;

  evg_sequencer #(.AW(AW)) dut (.*);
  always #10 clk = ~clk;
  always @(posedge clk) begin rdata <= ram[raddr]; cyc++; end
  assign grant = req_valid && !hold_grant;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // record every granted code with its cycle
  int g_cyc [$]; evcode_t g_code [$];
  always @(posedge clk) if (!rst && grant) begin g_cyc.push_back(cyc); g_code.push_back(req_code); end

  task automatic pulse_trig(output int tcyc);
    @(negedge clk) trig = 1; tcyc = cyc + 1;
    @(negedge clk) trig = 0;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t, n;
  initial begin
    foreach (ram[i]) ram[i] = EV_NULL;
    ram[0] = 8'h01; ram[3] = 8'h11; ram[4] = 8'h12; ram[9] = 8'h7A; ram[10] = 8'h55;
    cfg = '{enable: 1'b1, single: 1'b0, trig_en: 1'b1, ext_clk: 1'b0, div: 16'd5, end_addr: 19'd9};
    repeat (3) @(negedge clk);
    rst = 0;
    // continuous, internal clock
    pulse_trig(t);
    repeat (80) @(negedge clk);
    check(g_code.size() == 4, "four codes played (address 10 is past the end)");
    if (g_code.size() == 4) begin
      check(g_code[0] == 8'h01 && g_cyc[0] == t + 3 + 0*5, "address 0 code and time");
      check(g_code[1] == 8'h11 && g_cyc[1] == t + 3 + 3*5, "address 3 code and time");
      check(g_code[2] == 8'h12 && g_cyc[2] == t + 3 + 4*5, "address 4 code and time");
      check(g_code[3] == 8'h7A && g_cyc[3] == t + 3 + 9*5, "address 9 code and time");
    end
    check(!running, "sequence ended");
    // second trigger restarts
    g_code.delete(); g_cyc.delete();
    pulse_trig(t);
    @(negedge clk); @(negedge clk) pulse_trig(n);    // trigger during run: ignored
    repeat (80) @(negedge clk);
    check(g_code.size() == 4 && g_cyc[0] == t + 3, "retrigger plays again, trigger during run ignored");
    // external clock: ticks every 7 cycles, irregular start
    g_code.delete(); g_cyc.delete();
    cfg.ext_clk = 1'b1;
    pulse_trig(t);
    for (int i = 0; i < 12; i++) begin
      repeat (6) @(negedge clk);
      ext_tick = 1; @(negedge clk); ext_tick = 0;
    end
    repeat (5) @(negedge clk);
    check(g_code.size() == 4, "external clock plays four codes");
    if (g_code.size() == 4) check(g_cyc[3] - g_cyc[2] == 5 * 7, "external clock spacing 5 ticks x 7 cycles");
    // single mode
    cfg.ext_clk = 1'b0; cfg.single = 1'b1;
    g_code.delete(); g_cyc.delete();
    pulse_trig(t);
    repeat (80) @(negedge clk);
    check(g_code.size() == 0, "single mode: no run without arm");
    @(negedge clk) arm = 1; @(negedge clk) arm = 0;
    check(armed, "armed");
    pulse_trig(t);
    repeat (80) @(negedge clk);
    check(g_code.size() == 4 && !armed, "single mode: one run, disarmed");
    pulse_trig(t);
    repeat (80) @(negedge clk);
    check(g_code.size() == 4, "single mode: no second run");
    // overflow: hold the grant back
    cfg.single = 1'b0; cfg.div = 16'd1;
    g_code.delete(); g_cyc.delete();
    check(!overflow, "no overflow yet");
    hold_grant = 1;
    pulse_trig(t);
    repeat (20) @(negedge clk);
    check(overflow, "overflow when codes cannot be sent");
    check(req_valid && req_code == 8'h01, "first code held until granted");
    hold_grant = 0;
    repeat (20) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
