// tb_trig_delay: checks that fire comes exactly delay+1 cycles after start,
// for several delays including 0, and that a restart while counting restarts.
module tb_trig_delay;
  logic clk = 0, rst_n = 0, start = 0, fire, busy;
  logic [15:0] delay = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  trig_delay #(.DELAY_W(16)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_one(input int d);
    int n;
    @(negedge clk); delay = 16'(d); start = 1;
    @(negedge clk); start = 0;
    n = 1;
    while (!fire && n < d + 10) begin @(negedge clk); n++; end
    check(fire && n == d + 1, $sformatf("delay %0d: fire after %0d cycles", d, n));
    @(negedge clk);
    check(!fire && !busy, "fire is one cycle");
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run_one(0); run_one(1); run_one(5); run_one(37); run_one(130);
    // restart while counting
    @(negedge clk); delay = 16'd20; start = 1; @(negedge clk); start = 0;
    repeat (10) @(negedge clk);
    check(!fire, "no fire before restart");
    delay = 16'd4; start = 1; @(negedge clk); start = 0;
    repeat (4) begin check(!fire, "no early fire after restart"); @(negedge clk); end
    check(fire, "fire 5 cycles after restart");
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
