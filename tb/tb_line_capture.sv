// tb_line_capture: feeds ABCD-format streams of random length, after a random
// quiet time, into one line capture and checks every buffer write against the
// independently packed block, the done timing and the wrap-around (and its
// flag) for a stream longer than 512 bits.  Also checks that nothing is
// captured without arm.
module tb_line_capture;
  import mst_pkg::*;
  import abcd_stream_pkg::*;
  logic clk = 0, rst_n = 0, din = 0, arm = 0;
  logic [SLOT_W-1:0] slot = 0;
  logic wr_en, done, wrapped;
  logic [BUF_AW-1:0] wr_addr;
  logic [WORD_BITS-1:0] wr_data;
  logic [15:0] mem [1024];
  int checks = 0, failures = 0, writes = 0;
  always #12.5 clk = ~clk;

  line_capture dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && wr_en) begin mem[wr_addr] <= wr_data; writes++; end

  task automatic send(input bitq_t q);
    foreach (q[i]) begin din = q[i]; @(negedge clk); end
    din = 0;
  endtask

  initial begin
    block_t exp, got;
    bitq_t q;
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (mem[i]) mem[i] = 16'hDEAD;
    // a stream without arm is ignored
    send(make_stream(2, 1, 2));
    repeat (3) @(negedge clk);
    check(writes == 0 && !done, "no capture without arm");
    for (int ev = 0; ev < 14; ev++) begin
      int hits, w0, len;
      hits = (ev == 9) ? 30 : $urandom_range(0, 12);    // event 9 overflows the block
      slot = SLOT_W'($urandom);
      q = make_stream(hits, ev, $urandom);
      len = q.size();
      for (int i = 0; i < 32; i++) exp[i] = mem[{slot, 5'(i)}];
      exp = expected_block(q, exp);
      @(negedge clk); arm = 1; @(negedge clk); arm = 0;
      check(!done, "done cleared by arm");
      repeat ($urandom_range(0, 40)) @(negedge clk);
      w0 = writes;
      send(q);
      repeat (2) @(negedge clk);
      check(done, $sformatf("event %0d: done after trailer", ev));
      check(writes - w0 == n_words(q), $sformatf("event %0d: %0d writes, expected %0d", ev, writes - w0, n_words(q)));
      for (int i = 0; i < 32; i++) check(mem[{slot, 5'(i)}] == exp[i], $sformatf("event %0d word %0d", ev, i));
      check(wrapped == (n_words(q) > 32), $sformatf("event %0d: wrapped flag (%0d bits)", ev, len));
      if (n_words(q) > 32) check(mem[{slot, 5'd0}][15:11] != 5'b11101, "preamble overwritten by the wrap-around");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
