// tb_event_buffer: writes random words to random addresses and reads them back
// against a reference array; checks the one-cycle read latency.
module tb_event_buffer;
  logic clk = 0, wr_en = 0;
  logic [9:0] wr_addr = 0, rd_addr = 0;
  logic [15:0] wr_data = 0, rd_data;
  logic [15:0] ref_mem [1024];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  event_buffer #(.DEPTH(1024), .WIDTH(16)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    // fill the whole buffer
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(a); wr_data = 16'($urandom); ref_mem[a] = wr_data;
    end
    // random overwrites
    for (int k = 0; k < 300; k++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'($urandom); wr_data = 16'($urandom); ref_mem[wr_addr] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 400; k++) begin
      logic [9:0] a;
      a = 10'($urandom);
      rd_addr = a; @(posedge clk); #1;
      check(rd_data == ref_mem[a], $sformatf("read %0d", a));
      @(negedge clk);
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
