// tb_depp_regs: acts as the USB bridge on the DEPP bus (strobe, wait for
// wait_o, release, wait for wait_o low) and checks address/data writes and
// reads of every register, including the read-only counters.
module tb_depp_regs;
  logic clk = 0, rst_n = 0;
  logic astb_n = 1, dstb_n = 1, write_n = 1;
  logic [7:0] db_i = 0, db_o;
  logic db_oe, wait_o, enable, periodic_mode;
  logic [23:0] period;
  logic [31:0] trig_count = 32'hA1B2C3D4, coinc_count = 32'h01020304;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  depp_regs #(.PERIOD_DEFAULT(24'd400000)) dut (.*);

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
    if (!wr) check(db_oe, "db_oe during read");
    dout = db_o;
    astb_n = 1; dstb_n = 1;
    wait (wait_o == 0);
    write_n = 1;
  endtask

  task automatic wr_reg(input logic [7:0] a, input logic [7:0] d);
    logic [7:0] x;
    cyc(1, 1, a, x); cyc(0, 1, d, x);
  endtask
  task automatic rd_reg(input logic [7:0] a, output logic [7:0] d);
    logic [7:0] x;
    cyc(1, 1, a, x); cyc(0, 0, 8'h00, d);
  endtask

  initial begin
    logic [7:0] v;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    check(period == 24'd400000 && !enable, "reset values");
    rd_reg(8'd1, v); check(v == 8'h80, $sformatf("period byte0 %h", v));   // 400000 = 0x061A80
    rd_reg(8'd3, v); check(v == 8'h06, $sformatf("period byte2 %h", v));
    wr_reg(8'd0, 8'h01);
    check(enable && !periodic_mode, "control write: enable only");
    wr_reg(8'd0, 8'h02);
    check(!enable && periodic_mode, "control write: periodic only");
    wr_reg(8'd0, 8'h03);
    check(enable && periodic_mode, "control write");
    wr_reg(8'd1, 8'h34); wr_reg(8'd2, 8'h12); wr_reg(8'd3, 8'h00);
    check(period == 24'h001234, $sformatf("period write %h", period));
    rd_reg(8'd0, v); check(v == 8'h03, "control readback");
    rd_reg(8'd4, v); check(v == 8'hD4, "trig count byte0");
    rd_reg(8'd7, v); check(v == 8'hA1, "trig count byte3");
    rd_reg(8'd9, v); check(v == 8'h03, "coinc count byte1");
    rd_reg(8'd40, v); check(v == 8'h00, "unmapped reads 0");
    begin logic [7:0] x; cyc(1, 1, 8'h05, x); cyc(1, 0, 8'h00, x); check(x == 8'h05, "address readback"); end
    wr_reg(8'd0, 8'h00);
    check(!enable && !periodic_mode, "control clear");
    check(!db_oe, "bus released when idle");
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
