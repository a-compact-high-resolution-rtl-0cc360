// tb_readout_board: self-checking test of one complete readout board.
//
// Four behavioural silicon-module models (two data lines each) answer the
// board's trigger commands; a test-side Ethernet receiver decodes every data
// packet; configuration frames are sent into the receive port nibble by
// nibble as the transceiver would.  The test checks:
//   - before configuration the board holds its gate and ignores triggers;
//   - a frame for another board ID is ignored, the right one is accepted and
//     its two module commands reach every module;
//   - the trigger command leaves exactly delay + 6 clock cycles after the
//     trigger line toggles;
//   - every event arrives in a packet with consecutive event IDs and the data
//     of all 8 lines as sent by the modules, including long events that wrap
//     the 32-word block;
//   - a burst faster than the Ethernet link fills all 32 event slots, the
//     gate stays high meanwhile, and triggers during the gate are ignored;
//   - multi-event packets are split into IP fragments.
module tb_readout_board;
  import eth_tb_pkg::*;

  logic clk = 0, tx_clk = 0, rx_clk = 0, rst_n = 1;
  logic trig_in = 0, gate, cmd_out, tx_en, rx_dv = 0, tx_underrun;
  logic [7:0] data_in;
  logic [3:0] txd, rxd = 0;
  logic [31:0] events_done;
  logic [15:0] packets_sent, frames_sent, trig_ignored, trig_cmds_sent, cfg_accepted, frames_ignored;
  logic [7:0] lines_wrapped;
  int checks = 0, failures = 0;

  localparam logic [31:0] BOARD_ID = 32'h0000_0007;
  localparam int DELAY = 37;

  readout_board dut (.clk, .rst_n, .board_id(BOARD_ID), .board_mac(48'h02_00_00_00_00_07),
    .board_ip(32'hC0A8_0A07), .trig_in, .gate, .data_in, .cmd_out, .tx_clk, .txd, .tx_en,
    .rx_clk, .rxd, .rx_dv, .events_done, .packets_sent, .frames_sent, .trig_ignored,
    .trig_cmds_sent, .cfg_accepted, .frames_ignored, .lines_wrapped, .tx_underrun);

  abcd_model m0 (.clk, .cmd_in(cmd_out), .data(data_in[1:0]));
  abcd_model m1 (.clk, .cmd_in(cmd_out), .data(data_in[3:2]));
  abcd_model m2 (.clk, .cmd_in(cmd_out), .data(data_in[5:4]));
  abcd_model m3 (.clk, .cmd_in(cmd_out), .data(data_in[7:6]));
  eth_sink sink (.clk(tx_clk), .txd, .tx_en);

  always #12.5 clk = ~clk;
  always #20 tx_clk = ~tx_clk;
  initial begin #7; forever #20 rx_clk = ~rx_clk; end
  initial begin #1 rst_n = 0; #200 rst_n = 1; end
  initial begin #50ms; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_frame(input bq_t f);
    bq_t w;
    w = {};
    repeat (7) w.push_back(8'h55);
    w.push_back(8'hD5);
    w = {w, with_fcs(f)};
    @(negedge rx_clk);
    foreach (w[i]) begin
      rx_dv = 1; rxd = w[i][3:0]; @(negedge rx_clk);
      rxd = w[i][7:4]; @(negedge rx_clk);
    end
    rx_dv = 0; rxd = 0;
    repeat (24) @(negedge rx_clk);
  endtask

  function automatic bq_t cfg(input logic [31:0] id, input logic [7:0] flags);
    cmdq_t c;
    c.push_back('{8, {8'b1010_0100, 56'd0}});
    c.push_back('{8, {8'b1010_0010, 56'd0}});
    return make_config(48'h02_00_00_00_00_01, 32'hC0A8_0A01, 16'd6000, 16'h4D53, id, flags, 8'hFF, 16'(DELAY), c);
  endfunction

  // one trigger: toggle the line at a clock edge and time the command
  int lat_bad = 0;
  task automatic trigger(input bit measure);
    int n;
    @(negedge clk);
    trig_in = ~trig_in;
    if (measure) begin
      n = 0;
      while (cmd_out !== 1'b1) begin @(negedge clk); n++; end
      if (n != DELAY + 6) begin lat_bad++; $display("trigger latency %0d", n); end
    end
  endtask

  task automatic wait_idle();
    while (gate) @(negedge clk);
  endtask

  int gate_full_cycles = 0;
  int wraps [8];
  logic [7:0] wr_q = '0;
  always @(posedge clk) begin
    if (rst_n && dut.u_ctrl.full) gate_full_cycles++;
    for (int l = 0; l < 8; l++) if (rst_n && lines_wrapped[l] && !wr_q[l]) wraps[l]++;
    wr_q <= lines_wrapped;
  end

  initial begin
    int n, ign, bad;
    @(posedge rst_n);
    repeat (50) @(negedge clk);
    check(gate === 1'b1, "gate high before configuration");
    trigger(0);
    repeat (20) @(negedge clk);
    check(trig_ignored == 1 && trig_cmds_sent == 0, "trigger ignored before configuration");

    send_frame(cfg(32'h0000_0009, 8'h01));
    repeat (100) @(negedge clk);
    check(frames_ignored == 1 && cfg_accepted == 0, "frame for another board ignored");
    send_frame(cfg(BOARD_ID, 8'h01));
    repeat (400) @(negedge clk);
    check(cfg_accepted == 1, "configuration accepted");
    check(m0.configs == 2 && m3.configs == 2, $sformatf("module commands delivered %0d", m0.configs));
    check(gate === 1'b0, "gate low once running");

    // single events with random hits, one at a time
    for (int i = 0; i < 12; i++) begin
      if (i == 5 || i == 9) begin m0.force_hits = 30; m2.force_hits = 40; end
      else begin m0.force_hits = -1; m2.force_hits = -1; end
      trigger(1);
      repeat (5) @(negedge clk);
      check(gate === 1'b1, "gate high during capture");
      trigger(0);                                   // vetoed by the gate
      wait_idle();
      repeat ($urandom_range(0, 3000)) @(negedge clk);
    end
    m0.force_hits = -1; m2.force_hits = -1;
    check(lat_bad == 0, "trigger command latency");
    check(wraps[0] == 2 && wraps[4] == 2 && wraps[2] == 0, $sformatf("block wraps %0d %0d %0d", wraps[0], wraps[4], wraps[2]));

    // burst: trigger as soon as the gate drops until the ring has been full a while
    ign = trig_ignored;
    for (int i = 0; i < 60; i++) begin
      wait_idle();
      trigger(1);
      repeat (2) @(negedge clk);
    end
    check(gate_full_cycles > 1000, $sformatf("ring full for %0d cycles", gate_full_cycles));
    check(lat_bad == 0, "trigger command latency in burst");

    // drain
    n = 0;
    while ((sink.ev_id.size() < 72 || tx_en) && n < 400000) begin @(negedge clk); n++; end
    repeat (2000) @(negedge clk);

    check(sink.fcs_errors == 0 && sink.format_errors == 0,
          $sformatf("frame errors fcs=%0d format=%0d", sink.fcs_errors, sink.format_errors));
    check(sink.ev_id.size() == 72, $sformatf("events received %0d", sink.ev_id.size()));
    check(events_done == 72 && trig_cmds_sent == 72, $sformatf("events_done %0d", events_done));
    check(trig_ignored == 13, $sformatf("ignored triggers %0d", trig_ignored));
    check(sink.fragmented > 0, "multi-event packets fragmented");
    bad = 0;
    foreach (sink.ev_id[e]) begin
      if (sink.ev_id[e] != e) bad++;
      for (int l = 0; l < 8; l++) begin
        int mi, ln, nw;
        mi = l / 2; ln = l % 2;
        case (mi)
          0: nw = m0.exp_words[ln][e];
          1: nw = m1.exp_words[ln][e];
          2: nw = m2.exp_words[ln][e];
          default: nw = m3.exp_words[ln][e];
        endcase
        for (int w = 0; w < nw; w++) begin
          logic [15:0] x;
          case (mi)
            0: x = m0.exp_block[ln][e][w];
            1: x = m1.exp_block[ln][e][w];
            2: x = m2.exp_block[ln][e][w];
            default: x = m3.exp_block[ln][e][w];
          endcase
          if (sink.ev_data[e][l][w] !== x) begin
            bad++;
            if (bad < 5) $display("event %0d line %0d word %0d: %h expected %h", e, l, w, sink.ev_data[e][l][w], x);
          end
        end
      end
    end
    check(bad == 0, $sformatf("event data/ID mismatches %0d", bad));
    foreach (sink.pkt_seq[p]) if (p > 0)
      check(sink.pkt_seq[p] == sink.pkt_seq[p-1] + sink.pkt_events[p-1], "packet sequence = first event ID");
    check(!tx_underrun, "no transmit underrun");
    $display("events=%0d packets=%0d frames=%0d full_cycles=%0d", sink.ev_id.size(), sink.datagrams, sink.frames, gate_full_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
