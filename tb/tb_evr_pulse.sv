// Testbench of evr_pulse, both kinds of channel side by side. For random
// delay, width, prescaler and polarity it triggers both channels and checks
// the output in every cycle against the rule: active in cycles
// T+1+delay*presc .. T+(delay+width)*presc after a trigger in cycle T (the
// width-only channel ignores the delay). It also retriggers during a pulse.
module tb_evr_pulse;
  import evs_pkg::*;
  logic clk = 1'b0, rst = 1'b1, trig = 0;
  evr_pulse_cfg_t cfg;
  logic out_d, out_w;
  int checks = 0, failures = 0;

  evr_pulse #(.HAS_DELAY(1'b1)) dut_d (.clk, .rst, .cfg, .trig, .out(out_d));
  evr_pulse #(.HAS_DELAY(1'b0)) dut_w (.clk, .rst, .cfg, .trig, .out(out_w));
  always #10 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one trigger and check cycles 1..len after it
  task automatic run(input int d, input int w, input int p, input bit pol, input int retrig_at);
    int pe, t_start, len;
    cfg = '{polarity: pol, presc: 16'(p), delay: 24'(d), width: 16'(w)};
    pe = (p == 0) ? 1 : p;
    @(negedge clk) trig = 1;
    @(negedge clk) trig = 0;
    t_start = 0;
    len = (d + w) * pe + 5;
    for (int c = 1; c <= len; c++) begin
      bit ed, ew;
      int cc;
      if (retrig_at > 0 && c == retrig_at) begin trig = 1; t_start = c; end
      else trig = 0;
      cc = c - t_start;  // cycles since the latest trigger
      // values seen now belong to cycle c (after trigger cycle t_start)
      ed = (cc >= 1 + d * pe) && (cc <= (d + w) * pe) && (w > 0);
      ew = (cc >= 1) && (cc <= w * pe) && (w > 0);
      if (t_start > 0 && cc == 0) begin
        // a retrigger cycle: the outputs still show the previous state
        ed = (c >= 1 + d * pe) && (c <= (d + w) * pe) && (w > 0);
        ew = (c >= 1) && (c <= w * pe) && (w > 0);
      end
      checks += 2;
      if (out_d !== (ed ^ pol)) begin failures++; $display("FAIL delay ch d=%0d w=%0d p=%0d c=%0d out=%b", d, w, p, c, out_d); end
      if (out_w !== (ew ^ pol)) begin failures++; $display("FAIL width ch d=%0d w=%0d p=%0d c=%0d out=%b", d, w, p, c, out_w); end
      @(negedge clk);
    end
    trig = 0;
    repeat (len + 10) @(negedge clk);
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    run(3, 4, 1, 0, 0);
    run(0, 5, 0, 1, 0);
    run(2, 3, 4, 0, 0);
    run(5, 0, 1, 0, 0);
    for (int k = 0; k < 40; k++)
      run(int'($urandom_range(20)), int'($urandom_range(1, 20)), int'($urandom_range(5)), 1'($urandom), 0);
    run(2, 6, 2, 0, 7);   // retrigger inside the pulse
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
