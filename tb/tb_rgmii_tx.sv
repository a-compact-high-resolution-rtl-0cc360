// tb_rgmii_tx: sends frames of random length (some below the 60-byte minimum)
// with random gaps, decodes the nibbles on txd while tx_en is high, and checks
// preamble, start byte, data, zero padding, the frame check sequence (CRC-32
// residue, with the test's own CRC code validated on the standard check
// string), the 12-byte gap between frames and the absence of underrun.
module tb_rgmii_tx;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, in_ready, tx_en, underrun;
  logic [7:0] in_data = 0;
  logic [3:0] txd;
  int checks = 0, failures = 0;
  always #20 clk = ~clk;     // 25 MHz

  rgmii_tx dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] crc_of(input byte b[$]);
    logic [31:0] c;
    c = 32'hFFFFFFFF;
    foreach (b[i]) begin
      c = c ^ {24'd0, b[i]};
      repeat (8) c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    end
    return ~c;
  endfunction

  byte sent[$][$];
  byte got[$][$];
  int  gaps[$];

  // source: frames from the sent list
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      byte fr[$];
      int len;
      fr = {};
      len = (f % 3 == 0) ? $urandom_range(1, 59) : $urandom_range(60, 300);
      for (int i = 0; i < len; i++) fr.push_back(byte'($urandom));
      sent.push_back(fr);
      repeat ($urandom_range(0, 30)) @(negedge clk);
      for (int i = 0; i < len; i++) begin
        // in_ready only changes at rising edges: seen high at the falling
        // edge, the byte is taken at the next rising edge
        in_valid = 1; in_data = fr[i]; in_last = (i == len - 1);
        while (!in_ready) @(negedge clk);
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
    end
  end

  // sink: nibbles to bytes
  initial begin
    int idle;
    idle = 100;
    forever begin
      @(posedge clk); #1;
      if (rst_n && tx_en) begin
        byte fr[$];
        logic [3:0] lo;
        bit h;
        fr = {};
        gaps.push_back(idle);
        h = 0;
        while (tx_en) begin
          if (!h) lo = txd; else fr.push_back({txd, lo});
          h = ~h;
          @(posedge clk); #1;
        end
        got.push_back(fr);
        idle = 1;
      end else idle++;
    end
  end

  initial begin
    byte chk[$];
    chk = {"1","2","3","4","5","6","7","8","9"};
    check(crc_of(chk) == 32'hCBF43926, "test CRC code");
    wait (got.size() == 8);
    repeat (5) @(negedge clk);
    for (int f = 0; f < 8; f++) begin
      byte fr[$], body[$];
      int n, ok;
      body = {};
      fr = got[f];
      ok = 1;
      for (int i = 0; i < 7; i++) if (fr[i] != 8'h55) ok = 0;
      check(ok == 1 && fr[7] == 8'hD5, $sformatf("frame %0d preamble and SFD", f));
      n = (sent[f].size() < 60) ? 60 : sent[f].size();
      check(fr.size() == 8 + n + 4, $sformatf("frame %0d: %0d bytes on the wire, expected %0d", f, fr.size(), 8 + n + 4));
      for (int i = 8; i < fr.size() - 4; i++) body.push_back(fr[i]);
      ok = 1;
      for (int i = 0; i < body.size(); i++)
        if (body[i] != ((i < sent[f].size()) ? sent[f][i] : 8'h00)) ok = 0;
      check(ok == 1, $sformatf("frame %0d data and padding", f));
      check({fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]} == crc_of(body),
            $sformatf("frame %0d FCS", f));
      if (f > 0) check(gaps[f] >= 24, $sformatf("frame %0d gap %0d cycles", f, gaps[f]));
    end
    check(!underrun, "no underrun");
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
