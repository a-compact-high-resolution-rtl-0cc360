// tb_abcd_cmd_tx: records the serial command line and checks that a trigger
// sends 110 starting the cycle after fire, that configuration commands go out
// bit-exact with their length, that a trigger raised during a configuration
// command follows right after it, and that cmd_ready respects the priority.
module tb_abcd_cmd_tx;
  import mst_pkg::*;
  logic clk = 0, rst_n = 0, fire = 0, cmd_valid = 0, cmd_ready, cmd_out, busy;
  logic [CMD_W-1:0] cmd_bits = 0;
  logic [CMD_LEN_W-1:0] cmd_len = 0;
  logic [15:0] trig_sent;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  abcd_cmd_tx dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    check(cmd_out == 0 && cmd_ready, "idle");
    // trigger alone
    fire = 1; @(posedge clk); #1 fire = 0;
    check(cmd_out == 1, "first trigger bit the cycle after fire");
    check(trig_sent == 16'd1, "trigger counted");
    repeat (3) @(negedge clk);
    // clean trigger check with the full window
    @(negedge clk); fire = 1; @(negedge clk); fire = 0;
    begin
      logic [4:0] w;
      for (int i = 0; i < 5; i++) begin w = {w[3:0], cmd_out}; @(negedge clk); end
      check(w == 5'b11000, $sformatf("trigger pattern %b", w));
    end
    // configuration commands of random length
    for (int k = 0; k < 6; k++) begin
      int len;
      logic [CMD_W-1:0] bits;
      logic [CMD_W-1:0] got;
      len = $urandom_range(4, CMD_W);
      bits = {$urandom, $urandom};
      bits[CMD_W-1] = 1'b1;
      bits = bits & ~({CMD_W{1'b1}} >> len);     // left aligned, rest zero
      @(negedge clk); cmd_valid = 1; cmd_bits = bits; cmd_len = CMD_LEN_W'(len);
      check(cmd_ready, "ready when idle");
      @(negedge clk); cmd_valid = 0;
      got = '0;
      for (int i = 0; i < len; i++) begin
        got[CMD_W-1-i] = cmd_out;
        if (i == 2 && k == 3) fire = 1;          // trigger during a command
        @(negedge clk);
        fire = 0;
        if (i < len - 2) check(!cmd_ready, "not ready while sending");
      end
      check(got == bits, $sformatf("command %0d of %0d bits", k, len));
      if (k == 3) begin
        logic [2:0] t;
        for (int i = 0; i < 3; i++) begin t = {t[1:0], cmd_out}; @(negedge clk); end
        check(t == 3'b110, "trigger follows the interrupted command");
      end else begin
        check(cmd_out == 0, "idle after command");
      end
    end
    // fire and a waiting command in the same cycle: trigger first
    @(negedge clk); cmd_valid = 1; cmd_bits = {8'b10100100, 56'd0}; cmd_len = 7'd8; fire = 1;
    #1 check(!cmd_ready, "not ready when fire is high");
    @(negedge clk); fire = 0;
    begin
      logic [10:0] w;
      check(!cmd_ready, "not ready while the trigger goes");
      for (int i = 0; i < 11; i++) begin
        w = {w[9:0], cmd_out};
        @(negedge clk);
        if (i == 2) cmd_valid = 0;   // accepted at the end of the trigger
      end
      check(w == 11'b110_10100100, $sformatf("trigger then command %b", w));
    end
    check(trig_sent == 16'd4, $sformatf("trigger count %0d", trig_sent));
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
