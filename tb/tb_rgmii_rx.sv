// tb_rgmii_rx: drives frames as a transceiver does at 100 Mb/s (preamble
// nibbles, start nibble pair, data low nibble first, rx_dv around it), with
// a preamble shortened by a random amount, and checks the bytes delivered and
// the last flag on each frame's final byte.
module tb_rgmii_rx;
  logic clk = 0, rst_n = 0, rx_dv = 0;
  logic [3:0] rxd = 0;
  logic out_valid, out_last;
  logic [7:0] out_data;
  int checks = 0, failures = 0;
  always #20 clk = ~clk;

  rgmii_rx dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  byte got[$][$];
  byte cur[$];
  always @(posedge clk) if (rst_n && out_valid) begin
    cur.push_back(out_data);
    if (out_last) begin got.push_back(cur); cur = {}; end
  end

  initial begin
    byte sent[$][$];
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 6; f++) begin
      byte fr[$];
      int len;
      fr = {};
      len = $urandom_range(1, 200);
      for (int i = 0; i < len; i++) fr.push_back(byte'($urandom));
      sent.push_back(fr);
      repeat ($urandom_range(3, 20)) @(negedge clk);
      rx_dv = 1;
      repeat (15 - $urandom_range(0, 6)) begin rxd = 4'h5; @(negedge clk); end
      rxd = 4'hD; @(negedge clk);
      foreach (fr[i]) begin
        rxd = fr[i][3:0]; @(negedge clk);
        rxd = fr[i][7:4]; @(negedge clk);
      end
      rx_dv = 0; rxd = 0;
    end
    repeat (10) @(negedge clk);
    check(got.size() == 6, $sformatf("%0d frames", got.size()));
    for (int f = 0; f < 6 && f < got.size(); f++) begin
      check(got[f].size() == sent[f].size(), $sformatf("frame %0d length", f));
      for (int i = 0; i < sent[f].size() && i < got[f].size(); i++)
        check(got[f][i] == sent[f][i], $sformatf("frame %0d byte %0d", f, i));
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
