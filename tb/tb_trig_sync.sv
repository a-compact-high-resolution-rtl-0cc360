// tb_trig_sync: toggles the trigger line at random times and checks that each
// change gives exactly one one-cycle pulse, 2 to 3 cycles later, and that a
// line already high at reset is not taken as a trigger.
module tb_trig_sync;
  logic clk = 0, rst_n = 0, trig_in = 1, trig_pulse;
  int checks = 0, failures = 0, pulses = 0;
  always #12.5 clk = ~clk;

  trig_sync dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && trig_pulse) pulses++;

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (10) @(negedge clk);
    check(pulses == 0, "no trigger from reset level");
    for (int k = 0; k < 20; k++) begin
      int p0, lat;
      #($urandom_range(1, 24));         // asynchronous to clk
      trig_in = ~trig_in;
      p0 = pulses; lat = 0;
      while (pulses == p0 && lat < 10) begin @(posedge clk); #1; lat++; end
      check(pulses == p0 + 1 && lat >= 2 && lat <= 4, $sformatf("toggle %0d latency %0d", k, lat));
      repeat ($urandom_range(3, 12)) @(posedge clk);
      #1 check(pulses == p0 + 1, "exactly one pulse per toggle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
