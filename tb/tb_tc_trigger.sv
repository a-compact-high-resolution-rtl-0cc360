// tb_tc_trigger: drives short asynchronous scintillator pulses and checks the
// trigger controller rules: only a coincidence of both detectors toggles the
// output, nothing toggles while the gate is high or the trigger is disabled,
// periodic mode toggles exactly every `period` cycles, and the counters match
// what was observed on the output.
module tb_tc_trigger;
  logic clk = 0, rst_n = 1, gate = 0, enable = 0, periodic_mode = 0;
  logic [1:0] det = 0;
  logic [23:0] period = 24'd50;
  logic coinc, trig_out;
  logic [31:0] trig_count, coinc_count;
  int checks = 0, failures = 0, toggles = 0, coincs = 0;
  always #12.5 clk = ~clk;

  tc_trigger #(.PERIOD_W(24)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit started = 0;
  always @(trig_out) if (started) toggles++;

  // pulse on both detectors, overlapping for a few ns
  task automatic pulse(input bit d0, input bit d1);
    #($urandom_range(3, 20));
    det = {d1, d0};
    #4 det = 0;
    if (d0 && d1) coincs++;
    #200;
  endtask

  initial begin
    #1 rst_n = 0;   // a real falling edge, for the flip-flops clocked by the coincidence
    repeat (3) @(negedge clk); rst_n = 1; started = 1;
    repeat (3) @(negedge clk);
    begin
      int t0;
      // disabled: no trigger, but the coincidence is counted
      t0 = toggles; pulse(1, 1);
      check(toggles == t0, "disabled: no toggle");
      enable = 1;
      // coincidence mode
      for (int k = 0; k < 8; k++) begin
        t0 = toggles; pulse(1, 1);
        check(toggles == t0 + 1, $sformatf("coincidence %0d toggles once", k));
      end
      t0 = toggles; pulse(1, 0); pulse(0, 1);
      check(toggles == t0, "single detector: no toggle");
      gate = 1;
      t0 = toggles; pulse(1, 1); pulse(1, 1);
      check(toggles == t0, "gate high: no toggle");
      gate = 0;
      t0 = toggles; pulse(1, 1);
      check(toggles == t0 + 1, "gate low again: toggle");
      repeat (5) @(negedge clk);
      check(trig_count == 32'(toggles), $sformatf("trigger counter %0d vs %0d", trig_count, toggles));
      check(coinc_count == 32'(coincs), $sformatf("coincidence counter %0d vs %0d", coinc_count, coincs));
      // periodic mode
      periodic_mode = 1;
      t0 = toggles; pulse(1, 1);
      begin
        int gaps[$]; int c; logic prev;
        prev = trig_out; c = 0;
        repeat (520) begin
          @(posedge clk); #1; c++;
          if (trig_out != prev) begin gaps.push_back(c); c = 0; prev = trig_out; end
        end
        check(gaps.size() >= 9, $sformatf("periodic: %0d toggles in 520 cycles", gaps.size()));
        for (int i = 1; i < gaps.size(); i++) check(gaps[i] == 50, $sformatf("periodic gap %0d", gaps[i]));
      end
      gate = 1; repeat (5) @(negedge clk);
      t0 = toggles; repeat (200) @(negedge clk);
      check(toggles == t0, "periodic with gate high: no toggle");
      gate = 0; enable = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
