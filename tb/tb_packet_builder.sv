// tb_packet_builder: serves random buffer contents and a queue of complete
// events to the packet builder, takes its byte stream with a randomly stalling
// ready, splits it into frames and checks every frame independently: Ethernet
// addresses and type, IPv4 length, identification, fragment flag and offset,
// header checksum, the TCP header (sequence number = first event ID), and the
// reassembled payload against the expected events.  Also checks how many
// events go into each packet and that the slots come back.
module tb_packet_builder;
  import mst_pkg::*;
  localparam int NL = 8, MAXE = 4, FRAG = 1480, EVB = 4 + NL * 64;
  logic clk = 0, rst_n = 0;
  logic [SLOT_W:0] ev_avail = 0;
  logic [31:0] rd_event_id = 0;
  logic ev_release;
  logic [BUF_AW-1:0] rd_addr;
  logic [15:0] rd_data [NL];
  logic [47:0] src_mac = 48'h02_00_00_00_00_01, dst_mac = 48'h00_11_22_33_44_55;
  logic [31:0] src_ip = 32'hC0A8_0A02, dst_ip = 32'hC0A8_0A01;
  logic [15:0] src_port = 16'd5000, dst_port = 16'd6001;
  logic out_valid, out_last, out_ready = 0;
  logic [7:0] out_data;
  logic [15:0] packets_sent, frames_sent;
  logic [15:0] mem [NL][1024];
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  packet_builder #(.NUM_LINES(NL), .MAX_EVENTS(MAXE), .FRAG_BYTES(FRAG)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) for (int l = 0; l < NL; l++) rd_data[l] <= mem[l][rd_addr];

  // event queue as readout_ctrl keeps it
  int produced = 0;
  always @(posedge clk) if (rst_n && ev_release) begin ev_avail <= ev_avail - 1'b1; rd_event_id <= rd_event_id + 1; end

  // collect frames
  byte frames[$][$];
  byte cur[$];
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      cur.push_back(out_data);
      if (out_last) begin frames.push_back(cur); cur = {}; end
    end
  end

  function automatic int be16(byte f[$], int i); return {8'(f[i]), 8'(f[i+1])}; endfunction
  function automatic int unsigned be32(byte f[$], int i); return {8'(f[i]), 8'(f[i+1]), 8'(f[i+2]), 8'(f[i+3])}; endfunction

  // check one packet made of frames[f0 .. f0+nf-1] carrying events first..first+ne-1
  task automatic check_packet(input int f0, input int first, input int ne);
    byte pay[$];
    int plen, off, nf;
    plen = 20 + ne * EVB;
    nf = (plen + FRAG - 1) / FRAG;
    off = 0;
    check(frames.size() >= f0 + nf, $sformatf("packet of event %0d: %0d frames there", first, frames.size() - f0));
    if (frames.size() < f0 + nf) return;
    for (int k = 0; k < nf; k++) begin
      byte f[$];
      int flen, sum;
      f = frames[f0 + k];
      flen = (plen - off > FRAG) ? FRAG : plen - off;
      check(f.size() == 34 + flen, $sformatf("frame size %0d expected %0d", f.size(), 34 + flen));
      check({8'(f[0]),8'(f[1]),8'(f[2]),8'(f[3]),8'(f[4]),8'(f[5])} == dst_mac, "destination MAC");
      check({8'(f[6]),8'(f[7]),8'(f[8]),8'(f[9]),8'(f[10]),8'(f[11])} == src_mac, "source MAC");
      check(be16(f, 12) == 16'h0800 && f[14] == 8'h45 && f[23] == 8'd6, "IPv4 / TCP");
      check(be16(f, 16) == 20 + flen, "IP total length");
      check(be16(f, 20) == (((k < nf - 1) ? 16'h2000 : 16'h0000) | 16'(off / 8)), $sformatf("flags/offset %h", be16(f, 20)));
      check(be32(f, 26) == src_ip && be32(f, 30) == dst_ip, "IP addresses");
      sum = 0;
      for (int i = 14; i < 34; i += 2) sum += be16(f, i);
      while (sum > 16'hFFFF) sum = (sum & 16'hFFFF) + (sum >> 16);
      check(sum == 16'hFFFF, $sformatf("IP header checksum %h", sum));
      if (k > 0) check(be16(f, 18) == be16(frames[f0], 18), "same IP id in all fragments");
      for (int i = 34; i < f.size(); i++) pay.push_back(f[i]);
      off += flen;
    end
    // TCP header
    check(be16(pay, 0) == src_port && be16(pay, 2) == dst_port, "TCP ports");
    check(be32(pay, 4) == 32'(first), $sformatf("TCP sequence = first event ID %0d", be32(pay, 4)));
    check(pay[12] == 8'h50, "TCP header length");
    // events
    for (int e = 0; e < ne; e++) begin
      int base, id, errs;
      base = 20 + e * EVB; id = first + e; errs = 0;
      check(be32(pay, base) == 32'(id), $sformatf("event ID %0d", id));
      for (int l = 0; l < NL; l++)
        for (int w = 0; w < 32; w++)
          if (be16(pay, base + 4 + l * 64 + 2 * w) != int'(mem[l][{5'(id), 5'(w)}])) errs++;
      check(errs == 0, $sformatf("event %0d data: %0d wrong words", id, errs));
    end
  endtask

  initial begin
    foreach (mem[l, a]) mem[l][a] = 16'($urandom);
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    check(frames.size() == 0 && !out_valid, "nothing sent without events");
    @(negedge clk); ev_avail = 6;
    wait (ev_avail == 0);
    repeat (100) @(negedge clk);
    check(frames.size() == 3, $sformatf("6 events: %0d frames (4 events in 2 fragments, then 2 events)", frames.size()));
    check_packet(0, 0, 4);
    check_packet(2, 4, 2);
    // one more event, later
    @(negedge clk); ev_avail = ev_avail + 1;
    wait (ev_avail == 0);
    repeat (50) @(negedge clk);
    check_packet(3, 6, 1);
    // 40 events arriving (slot numbers wrap past 32)
    @(negedge clk); ev_avail = 30;
    wait (ev_avail == 0);
    repeat (50) @(negedge clk);
    begin
      int f, ev;
      f = 4; ev = 7;
      while (ev < 37) begin
        int ne;
        ne = (37 - ev > MAXE) ? MAXE : 37 - ev;
        check_packet(f, ev, ne);
        f += (20 + ne * EVB + FRAG - 1) / FRAG;
        ev += ne;
      end
      check(frames.size() == f, "no extra frames");
      check(32'(packets_sent) == 3 + 8 && 32'(frames_sent) == f, $sformatf("counters %0d %0d", packets_sent, frames_sent));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
