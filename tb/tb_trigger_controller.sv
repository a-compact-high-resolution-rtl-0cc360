// tb_trigger_controller: self-checking test of the trigger controller (the
// coincidence/periodic trigger plus its DEPP register port), two boards.
//
// The test programs the controller through DEPP bus cycles, as the host does
// through the USB bridge, then: sends overlapping and single detector pulses
// (only overlaps may toggle the trigger line); raises one board's gate (no
// toggles while it is high); switches to periodic mode with a short period and
// measures the toggle spacing; and finally reads the trigger and coincidence
// counters back over DEPP and compares them with its own counts.
module tb_trigger_controller;
  logic clk = 0, rst_n = 1;
  logic [1:0] det = 2'b00;
  logic [1:0] gate = 2'b00;
  logic astb_n = 1, dstb_n = 1, write_n = 1;
  logic [7:0] db_i = 0, db_o;
  logic db_oe, wait_o, trig_out, coinc;
  int checks = 0, failures = 0;
  int toggles = 0, coincs = 0;

  trigger_controller #(.NUM_BOARDS(2)) dut (.*);

  always #12.5 clk = ~clk;
  initial begin #1 rst_n = 0; #100 rst_n = 1; end
  initial begin #20ms; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  logic last_t;
  initial begin
    #150 last_t = trig_out;
    forever begin @(trig_out); toggles++; end
  end
  always @(posedge coinc) if (rst_n) coincs++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cyc(input bit is_addr, input bit wr, input logic [7:0] din, output logic [7:0] dout);
    #7;
    write_n = ~wr; db_i = din;
    if (is_addr) astb_n = 0; else dstb_n = 0;
    wait (wait_o == 1);
    #3;
    dout = db_o;
    astb_n = 1; dstb_n = 1;
    wait (wait_o == 0);
    write_n = 1;
  endtask
  task automatic wr_reg(input logic [7:0] a, input logic [7:0] d);
    logic [7:0] x;
    cyc(1, 1, a, x); cyc(0, 1, d, x);
  endtask
  task automatic rd32(input logic [7:0] a, output logic [31:0] v);
    logic [7:0] x, d;
    for (int i = 0; i < 4; i++) begin
      cyc(1, 1, a + 8'(i), x); cyc(0, 0, 8'h00, d); v[8*i +: 8] = d;
    end
  endtask

  task automatic pulse(input bit both);
    int w0, w1, off;
    w0 = $urandom_range(20, 60); w1 = $urandom_range(20, 60); off = $urandom_range(0, 15);
    fork
      begin det[0] = 1; #(w0); det[0] = 0; end
      begin #(both ? off : w0 + 30); det[1] = 1; #(w1); det[1] = 0; end
    join
    #200;
  endtask

  initial begin
    int t0, n;
    logic [31:0] v;
    realtime ta, tb;
    #300;
    // disabled: no toggles
    pulse(1);
    check(toggles == 0, "no trigger while disabled");
    wr_reg(8'd0, 8'h01);                               // enable, coincidence mode
    t0 = toggles;
    for (int i = 0; i < 20; i++) pulse(1);
    check(toggles - t0 == 20, $sformatf("coincidences toggled %0d of 20", toggles - t0));
    t0 = toggles;
    for (int i = 0; i < 10; i++) pulse(0);
    check(toggles == t0, "single-detector pulses ignored");
    // gate from board 1 blocks
    gate = 2'b10; #100;
    t0 = toggles;
    for (int i = 0; i < 5; i++) pulse(1);
    check(toggles == t0, "gate blocks triggers");
    gate = 2'b00; #100;
    pulse(1);
    check(toggles == t0 + 1, "trigger after gate release");
    // periodic mode, period 200 cycles = 5 us
    wr_reg(8'd1, 8'd200); wr_reg(8'd2, 8'd0); wr_reg(8'd3, 8'd0);
    t0 = toggles;
    wr_reg(8'd0, 8'h03);
    @(trig_out); ta = $realtime;
    @(trig_out); tb = $realtime;
    check(tb - ta > 4990 && tb - ta < 5010, $sformatf("periodic spacing %0t", tb - ta));
    pulse(1); pulse(1);                               // coincidences do not trigger here
    #20us;
    wr_reg(8'd0, 8'h01);
    n = toggles - t0;
    check(n >= 5 && n <= 9, $sformatf("periodic toggles %0d", n));
    #1us;
    rd32(8'd4, v);
    check(v == 32'(toggles), $sformatf("trigger counter %0d vs %0d", v, toggles));
    rd32(8'd8, v);
    check(v == 32'(coincs), $sformatf("coincidence counter %0d vs %0d", v, coincs));
    check(coincs == 29, $sformatf("coincidences seen %0d", coincs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
