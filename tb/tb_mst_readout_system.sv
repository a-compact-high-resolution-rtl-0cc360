// tb_mst_readout_system: end-to-end test of the whole readout system at its
// default size (trigger controller plus two readout boards of 8 lines each).
//
// Each board drives four behavioural silicon-module models and sends its data
// packets to a test-side Ethernet receiver; each board has its own 40 MHz
// clock with a different phase.  The host side is modelled by DEPP bus cycles
// to the trigger controller and configuration frames into each board's
// receive port.  The run goes through these phases:
//   1. configure both boards (one wrong-ID frame is sent first), enable the
//      coincidence trigger;
//   2. random detector pulses, some singles, some while the boards are busy;
//   3. switch to periodic mode with a short period (threshold-scan style),
//      then back to coincidence mode;
//   4. a fast burst of coincidences with long events that wrap their blocks.
// It then checks that both boards read out every trigger the controller sent,
// that event IDs agree between boards, that every event's data matches what
// the modules sent, and that each mechanism happened at least once:
// coincidence trigger, gate veto, periodic trigger, mode switch, block wrap,
// ring full, IP fragmentation, configuration accept and ignore.
module tb_mst_readout_system;
  import eth_tb_pkg::*;

  localparam int NB = 2;
  localparam int DELAY = 25;

  logic tc_clk = 0, rst_n = 1;
  logic [1:0] det = 2'b00;
  logic astb_n = 1, dstb_n = 1, write_n = 1;
  logic [7:0] db_i = 0, db_o;
  logic db_oe, wait_o, trig_line, coinc;
  logic [NB-1:0] rb_clk = '0, tx_clk = '0, rx_clk = '0, rx_dv = '0, cmd_out, tx_en, gate, tx_underrun;
  logic [NB-1:0][31:0] board_id, board_ip, events_done;
  logic [NB-1:0][47:0] board_mac;
  logic [NB-1:0][7:0] data_in, lines_wrapped;
  logic [NB-1:0][3:0] txd, rxd = '0;
  logic [NB-1:0][15:0] packets_sent, frames_sent, trig_ignored, trig_cmds_sent, cfg_accepted, frames_ignored;
  int checks = 0, failures = 0;

  assign board_id  = {32'd2, 32'd1};
  assign board_ip  = {32'hC0A8_0A12, 32'hC0A8_0A11};
  assign board_mac = {48'h02_00_00_00_00_12, 48'h02_00_00_00_00_11};

  mst_readout_system dut (.*);

  abcd_model a0 (.clk(rb_clk[0]), .cmd_in(cmd_out[0]), .data(data_in[0][1:0]));
  abcd_model a1 (.clk(rb_clk[0]), .cmd_in(cmd_out[0]), .data(data_in[0][3:2]));
  abcd_model a2 (.clk(rb_clk[0]), .cmd_in(cmd_out[0]), .data(data_in[0][5:4]));
  abcd_model a3 (.clk(rb_clk[0]), .cmd_in(cmd_out[0]), .data(data_in[0][7:6]));
  abcd_model b0 (.clk(rb_clk[1]), .cmd_in(cmd_out[1]), .data(data_in[1][1:0]));
  abcd_model b1 (.clk(rb_clk[1]), .cmd_in(cmd_out[1]), .data(data_in[1][3:2]));
  abcd_model b2 (.clk(rb_clk[1]), .cmd_in(cmd_out[1]), .data(data_in[1][5:4]));
  abcd_model b3 (.clk(rb_clk[1]), .cmd_in(cmd_out[1]), .data(data_in[1][7:6]));
  eth_sink s0 (.clk(tx_clk[0]), .txd(txd[0]), .tx_en(tx_en[0]));
  eth_sink s1 (.clk(tx_clk[1]), .txd(txd[1]), .tx_en(tx_en[1]));

  always #12.5 tc_clk = ~tc_clk;
  initial begin #3;  forever #12.5 rb_clk[0] = ~rb_clk[0]; end
  initial begin #9;  forever #12.5 rb_clk[1] = ~rb_clk[1]; end
  initial begin #1;  forever #20 tx_clk[0] = ~tx_clk[0]; end
  initial begin #13; forever #20 tx_clk[1] = ~tx_clk[1]; end
  initial begin #5;  forever #20 rx_clk[0] = ~rx_clk[0]; end
  initial begin #17; forever #20 rx_clk[1] = ~rx_clk[1]; end
  initial begin #1 rst_n = 0; #200 rst_n = 1; end
  initial begin #100ms; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- mechanism counters ----
  int n_toggle = 0, n_coinc = 0, n_veto = 0, n_periodic = 0, n_switch = 0, n_wrap = 0, n_full = 0;
  bit periodic = 0;
  initial begin #300; forever begin @(trig_line); n_toggle++; if (periodic) n_periodic++; end end
  always @(posedge coinc) if (rst_n) begin n_coinc++; if (|gate) n_veto++; end
  logic [NB-1:0][7:0] wr_q = '0;
  logic [NB-1:0] full_q = '0;
  always @(posedge tc_clk) begin
    for (int b = 0; b < NB; b++) for (int l = 0; l < 8; l++)
      if (rst_n && lines_wrapped[b][l] && !wr_q[b][l]) n_wrap++;
    if (rst_n && dut.g_rb[0].u_rb.u_ctrl.full && !full_q[0]) n_full++;
    if (rst_n && dut.g_rb[1].u_rb.u_ctrl.full && !full_q[1]) n_full++;
    full_q <= {dut.g_rb[1].u_rb.u_ctrl.full, dut.g_rb[0].u_rb.u_ctrl.full};
    wr_q <= lines_wrapped;
  end

  // ---- host side: DEPP and configuration frames ----
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

  task automatic send_frame(input int b, input bq_t f);
    bq_t w;
    w = {};
    repeat (7) w.push_back(8'h55);
    w.push_back(8'hD5);
    w = {w, with_fcs(f)};
    @(negedge rx_clk[b]);
    foreach (w[i]) begin
      rx_dv[b] = 1; rxd[b] = w[i][3:0]; @(negedge rx_clk[b]);
      rxd[b] = w[i][7:4]; @(negedge rx_clk[b]);
    end
    rx_dv[b] = 0; rxd[b] = 0;
    repeat (24) @(negedge rx_clk[b]);
  endtask

  function automatic bq_t cfg(input logic [31:0] id);
    cmdq_t c;
    c.push_back('{8, {8'b1010_0100, 56'd0}});
    return make_config(48'h02_00_00_00_00_01, 32'hC0A8_0A01, 16'd6000, 16'h4D53, id, 8'h01, 8'hFF, 16'(DELAY), c);
  endfunction

  task automatic pulse(input bit both);
    int w0, w1;
    w0 = $urandom_range(20, 60); w1 = $urandom_range(20, 60);
    fork
      begin det[0] = 1; #(w0); det[0] = 0; end
      begin #(both ? $urandom_range(0, 15) : w0 + 30); det[1] = 1; #(w1); det[1] = 0; end
    join
  endtask

  task automatic set_hits(input int h);
    a0.force_hits = h; a1.force_hits = h; b2.force_hits = h; b3.force_hits = h;
  endtask

  function automatic int nwords(input int b, input int m, input int ln, input int e);
    case (b * 4 + m)
      0: return a0.exp_words[ln][e];  1: return a1.exp_words[ln][e];
      2: return a2.exp_words[ln][e];  3: return a3.exp_words[ln][e];
      4: return b0.exp_words[ln][e];  5: return b1.exp_words[ln][e];
      6: return b2.exp_words[ln][e];  default: return b3.exp_words[ln][e];
    endcase
  endfunction
  function automatic logic [15:0] eword(input int b, input int m, input int ln, input int e, input int w);
    case (b * 4 + m)
      0: return a0.exp_block[ln][e][w];  1: return a1.exp_block[ln][e][w];
      2: return a2.exp_block[ln][e][w];  3: return a3.exp_block[ln][e][w];
      4: return b0.exp_block[ln][e][w];  5: return b1.exp_block[ln][e][w];
      6: return b2.exp_block[ln][e][w];  default: return b3.exp_block[ln][e][w];
    endcase
  endfunction

  initial begin
    logic [31:0] v;
    int n, bad, total;
    @(posedge rst_n);
    #2us;
    // phase 1: configuration
    send_frame(0, cfg(32'd5));                     // nobody has ID 5
    fork send_frame(0, cfg(32'd1)); send_frame(1, cfg(32'd2)); join
    #10us;
    check(cfg_accepted[0] == 1 && cfg_accepted[1] == 1 && frames_ignored[0] == 1, "board configuration");
    check(a0.configs == 1 && b3.configs == 1, "module command delivered");
    wr_reg(8'd0, 8'h01);
    // phase 2: random cosmic-like pulses
    for (int i = 0; i < 40; i++) begin
      pulse($urandom_range(0, 4) != 0);
      #($urandom_range(1000, 40000));
    end
    // phase 3: periodic trigger, 200 us period
    wr_reg(8'd1, 8'h40); wr_reg(8'd2, 8'h1F); wr_reg(8'd3, 8'h00);   // 8000 cycles
    periodic = 1; n_switch++;
    wr_reg(8'd0, 8'h03);
    #1ms;
    wr_reg(8'd0, 8'h01);
    #1us; periodic = 0; n_switch++;
    // phase 4: fast burst with long events
    set_hits(35);
    for (int i = 0; i < 400; i++) begin
      if (i == 40) set_hits(-1);
      pulse(1);
      #($urandom_range(200, 2000));
    end
    set_hits(-1);
    wr_reg(8'd0, 8'h00);
    // drain
    n = 0;
    while ((gate != 2'b00 || tx_en != 2'b00 || s0.ev_id.size() != events_done[0] || s1.ev_id.size() != events_done[1])
           && n < 20000) begin #1us; n++; end
    #20us;
    rd32(8'd4, v);
    check(v == 32'(n_toggle), $sformatf("controller trigger count %0d, seen %0d", v, n_toggle));
    check(events_done[0] == 32'(n_toggle) && events_done[1] == 32'(n_toggle),
          $sformatf("events per board %0d %0d, triggers %0d", events_done[0], events_done[1], n_toggle));
    check(trig_ignored[0] == 0 && trig_ignored[1] == 0, "no trigger lost by a board");
    check(s0.ev_id.size() == n_toggle && s1.ev_id.size() == n_toggle,
          $sformatf("events received %0d %0d", s0.ev_id.size(), s1.ev_id.size()));
    check(s0.fcs_errors + s1.fcs_errors + s0.format_errors + s1.format_errors == 0, "frame errors");
    check(tx_underrun == 2'b00, "no transmit underrun");
    bad = 0; total = 0;
    for (int e = 0; e < s0.ev_id.size() && e < s1.ev_id.size(); e++) begin
      if (s0.ev_id[e] != e || s1.ev_id[e] != s0.ev_id[e]) bad++;
      for (int b = 0; b < NB; b++)
        for (int l = 0; l < 8; l++)
          for (int w = 0; w < nwords(b, l / 2, l % 2, e); w++) begin
            logic [15:0] got;
            got = (b == 0) ? s0.ev_data[e][l][w] : s1.ev_data[e][l][w];
            total++;
            if (got !== eword(b, l / 2, l % 2, e, w)) begin
              bad++;
              if (bad < 5) $display("board %0d event %0d line %0d word %0d: %h", b, e, l, w, got);
            end
          end
    end
    check(bad == 0, $sformatf("event ID/data mismatches %0d of %0d words", bad, total));
    check(n_coinc - n_veto > 0, "coincidence triggers");
    check(n_veto > 0, $sformatf("gate vetoes %0d", n_veto));
    check(n_periodic > 3, $sformatf("periodic triggers %0d", n_periodic));
    check(n_switch == 2, "mode switches");
    check(n_wrap > 0, $sformatf("block wraps %0d", n_wrap));
    check(n_full > 0, $sformatf("ring full %0d", n_full));
    check(s0.fragmented > 0 && s1.fragmented > 0, "IP fragmentation");
    $display("triggers=%0d coinc=%0d vetoed=%0d periodic=%0d wraps=%0d full=%0d packets=%0d/%0d frames=%0d/%0d",
             n_toggle, n_coinc, n_veto, n_periodic, n_wrap, n_full, s0.datagrams, s1.datagrams, s0.frames, s1.frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
