// tb_readout_rate: trigger-rate test of one readout board at its default size.
//
// The board is configured with delay 0 and all lines enabled, the front-end
// models send empty events (no hits), and the test toggles the trigger line
// again as soon as the gate drops, i.e. at the highest rate the board accepts.
// Two rates are measured and compared with what the design's numbers predict:
//   - burst rate while free slots remain: the dead time per event is the
//     trigger-to-command latency (6 cycles), the 3-bit command, the module
//     latency (20 cycles in the model), the 33-bit empty stream and the
//     return of the gate, so well over 300 kHz;
//   - sustained rate once all 32 slots are full: set by the 100 Mb/s link.
//     Four events of 4 + 8 x 64 bytes with their TCP/IP headers make two IP
//     fragments, 2220 bytes on the wire with preamble, FCS and gap, i.e.
//     44.4 us per event, about 22.5 kHz.
// It also checks that no event was lost and that the data were intact.
module tb_readout_rate;
  import eth_tb_pkg::*;

  logic clk = 0, tx_clk = 0, rx_clk = 0, rst_n = 1;
  logic trig_in = 0, gate, cmd_out, tx_en, rx_dv = 0, tx_underrun;
  logic [7:0] data_in;
  logic [3:0] txd, rxd = 0;
  logic [31:0] events_done;
  logic [15:0] packets_sent, frames_sent, trig_ignored, trig_cmds_sent, cfg_accepted, frames_ignored;
  logic [7:0] lines_wrapped;
  int checks = 0, failures = 0;

  readout_board dut (.clk, .rst_n, .board_id(32'd3), .board_mac(48'h02_00_00_00_00_03),
    .board_ip(32'hC0A8_0A03), .trig_in, .gate, .data_in, .cmd_out, .tx_clk, .txd, .tx_en,
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
  initial begin #20ms; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

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
  endtask

  initial begin
    cmdq_t c;
    realtime t0, t32, ta, tb;
    int na, nb, bad;
    real burst_khz, sust_khz;
    m0.force_hits = 0; m1.force_hits = 0; m2.force_hits = 0; m3.force_hits = 0;
    @(posedge rst_n);
    #1us;
    send_frame(make_config(48'h02_00_00_00_00_01, 32'hC0A8_0A01, 16'd6000, 16'h4D53, 32'd3, 8'h01, 8'hFF, 16'd0, c));
    #5us;
    check(cfg_accepted == 1 && gate == 0, "configured");
    t0 = $realtime; t32 = 0; ta = 0;
    for (int i = 0; i < 200; i++) begin
      while (gate) @(negedge clk);
      @(negedge clk);
      trig_in = ~trig_in;
      repeat (6) @(negedge clk);                 // the gate answers 4 cycles after a toggle
      if (i == 31) begin while (gate && !dut.u_ctrl.full) @(negedge clk); t32 = $realtime; end
      if (i == 80) begin ta = $realtime; na = events_done; end
    end
    tb = $realtime; nb = events_done;
    burst_khz = 32.0 / ((t32 - t0) * 1e-9) / 1e3;
    sust_khz  = (nb - na) / ((tb - ta) * 1e-9) / 1e3;
    $display("burst rate %0.1f kHz, sustained rate %0.2f kHz", burst_khz, sust_khz);
    check(burst_khz > 300.0, $sformatf("burst rate %0.1f kHz", burst_khz));
    check(sust_khz > 21.5 && sust_khz < 23.0, $sformatf("sustained rate %0.2f kHz", sust_khz));
    while (sink.ev_id.size() < 200) #1us;
    #10us;
    check(events_done == 200 && trig_ignored == 0, $sformatf("events %0d ignored %0d", events_done, trig_ignored));
    check(sink.fcs_errors == 0 && sink.format_errors == 0, "frames intact");
    bad = 0;
    foreach (sink.ev_id[e]) begin
      if (sink.ev_id[e] != e) bad++;
      for (int w = 0; w < m1.exp_words[0][e]; w++) if (sink.ev_data[e][2][w] !== m1.exp_block[0][e][w]) bad++;
    end
    check(bad == 0, $sformatf("event ID/data errors %0d", bad));
    check(!tx_underrun, "no transmit underrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
