// readout_board: FPGA firmware of one readout board, serving a tracking
// station of four silicon modules (eight serial data lines, one command line).
//
// Data path: the toggling trigger line from the trigger controller is
// registered (trig_sync); if the board is ready, readout_ctrl raises the gate
// back to the trigger controller, arms the eight line captures for the next
// free event slot and starts the trigger delay.  When the delay has run out,
// abcd_cmd_tx puts the trigger command on the command line to all front-end
// chips.  The chips answer on the data lines; each line_capture finds the
// preamble and writes preamble, data and trailer into its 16 kbit
// event_buffer.  When every line has delivered its trailer, the gate drops and
// the event is queued for packet_builder, which sends multi-event
// Ethernet/IPv4/TCP packets through a clock-crossing FIFO and rgmii_tx to the
// Ethernet transceiver.  Configuration arrives the other way: rgmii_rx ->
// FIFO -> config_rx, which filters the packet and produces the front-end
// commands, the run flag, line mask, trigger delay and the data destination.
//
// Clocks: clk (40 MHz, also the front-end clock), tx_clk and rx_clk (25 MHz
// RGMII clocks at 100 Mb/s).  rst_n resets all three domains (asynchronous).
// Interface and timing of the parts are described in their own files.
//
// Lint notes: the command serialiser's busy output is left unread here (the
// readout control needs only the trigger path); rst_n is reported as used both
// asynchronously and synchronously because the assertions below use it in
// their disable condition, which is harmless.
module readout_board
  import mst_pkg::*;
#(
  parameter int unsigned NUM_LINES  = 8,
  parameter int unsigned MAX_EVENTS = 4,
  parameter int unsigned FRAG_BYTES = 1480,
  parameter logic [15:0] CFG_PROTO  = 16'h4D53,
  parameter logic [15:0] DATA_PORT  = 16'd5000     // TCP source port of data packets
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [31:0]          board_id,
  input  logic [47:0]          board_mac,
  input  logic [31:0]          board_ip,
  // trigger controller
  input  logic                 trig_in,
  output logic                 gate,
  // front-end modules
  input  logic [NUM_LINES-1:0] data_in,
  output logic                 cmd_out,
  // RGMII to the Ethernet transceiver
  input  logic                 tx_clk,
  output logic [3:0]           txd,
  output logic                 tx_en,
  input  logic                 rx_clk,
  input  logic [3:0]           rxd,
  input  logic                 rx_dv,
  // status
  output logic [31:0]          events_done,
  output logic [15:0]          packets_sent,
  output logic [15:0]          frames_sent,
  output logic [15:0]          trig_ignored,
  output logic [15:0]          trig_cmds_sent,
  output logic [15:0]          cfg_accepted,
  output logic [15:0]          frames_ignored,
  output logic [NUM_LINES-1:0] lines_wrapped,
  output logic                 tx_underrun
);
  // ---- configuration ----
  logic                 run;
  logic [7:0]           line_mask8;
  logic [15:0]          delay;
  logic [47:0]          peer_mac;
  logic [31:0]          peer_ip;
  logic [15:0]          peer_port;
  logic                 cmd_valid, cmd_ready;
  logic [CMD_W-1:0]     cmd_bits;
  logic [CMD_LEN_W-1:0] cmd_len;

  // ---- trigger and event control ----
  logic                 trig_pulse, arm, fire, ev_release;
  logic [SLOT_W-1:0]    wr_slot;
  logic [SLOT_W:0]      ev_avail;
  logic [31:0]          rd_event_id;
  logic [NUM_LINES-1:0] line_done, line_mask;

  assign line_mask = NUM_LINES'(line_mask8);

  trig_sync u_sync (.clk, .rst_n, .trig_in, .trig_pulse);

  readout_ctrl #(.NUM_LINES(NUM_LINES)) u_ctrl (
    .clk, .rst_n, .run, .line_mask, .trig(trig_pulse), .line_done, .ev_release,
    .gate, .arm, .wr_slot, .ev_avail, .rd_event_id, .events_done, .trig_ignored);

  logic delay_busy;
  trig_delay #(.DELAY_W(16)) u_delay (.clk, .rst_n, .start(arm), .delay, .fire, .busy(delay_busy));

  logic cmd_busy;
  abcd_cmd_tx u_cmd (
    .clk, .rst_n, .fire, .cmd_valid, .cmd_bits, .cmd_len, .cmd_ready,
    .cmd_out, .busy(cmd_busy), .trig_sent(trig_cmds_sent));

  // ---- line captures and buffers ----
  logic [BUF_AW-1:0]    rd_addr;
  logic [WORD_BITS-1:0] rd_data [NUM_LINES];

  for (genvar i = 0; i < NUM_LINES; i++) begin : g_line
    logic                 wr_en;
    logic [BUF_AW-1:0]    wr_addr;
    logic [WORD_BITS-1:0] wr_data;

    line_capture u_cap (
      .clk, .rst_n, .din(data_in[i]), .arm, .slot(wr_slot),
      .wr_en, .wr_addr, .wr_data, .done(line_done[i]), .wrapped(lines_wrapped[i]));

    event_buffer #(.DEPTH(BUF_WORDS), .WIDTH(WORD_BITS)) u_buf (
      .clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data(rd_data[i]));
  end

  // ---- data packets out ----
  logic       pb_valid, pb_last, pb_ready;
  logic [7:0] pb_data;

  packet_builder #(.NUM_LINES(NUM_LINES), .MAX_EVENTS(MAX_EVENTS), .FRAG_BYTES(FRAG_BYTES)) u_pb (
    .clk, .rst_n, .ev_avail, .rd_event_id, .ev_release, .rd_addr, .rd_data,
    .src_mac(board_mac), .dst_mac(peer_mac), .src_ip(board_ip), .dst_ip(peer_ip),
    .src_port(DATA_PORT), .dst_port(peer_port),
    .out_valid(pb_valid), .out_data(pb_data), .out_last(pb_last), .out_ready(pb_ready),
    .packets_sent, .frames_sent);

  logic       tq_valid, tq_ready;
  logic [8:0] tq_data;

  async_fifo #(.W(9), .AW(6)) u_txq (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_valid(pb_valid), .wr_data({pb_last, pb_data}), .wr_ready(pb_ready),
    .rd_clk(tx_clk), .rd_rst_n(rst_n), .rd_valid(tq_valid), .rd_data(tq_data), .rd_ready(tq_ready));

  rgmii_tx u_tx (
    .clk(tx_clk), .rst_n, .in_valid(tq_valid), .in_data(tq_data[7:0]), .in_last(tq_data[8]),
    .in_ready(tq_ready), .txd, .tx_en, .underrun(tx_underrun));

  // ---- configuration in ----
  logic       rx_valid, rx_last;
  logic [7:0] rx_data;
  logic       rq_valid, rq_ready, rq_wready;
  logic [8:0] rq_data;

  rgmii_rx u_rx (.clk(rx_clk), .rst_n, .rxd, .rx_dv, .out_valid(rx_valid), .out_data(rx_data), .out_last(rx_last));

  // Deep enough for a whole 1518-byte frame, so the receiver never has to wait.
  async_fifo #(.W(9), .AW(11)) u_rxq (
    .wr_clk(rx_clk), .wr_rst_n(rst_n), .wr_valid(rx_valid), .wr_data({rx_last, rx_data}), .wr_ready(rq_wready),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_valid(rq_valid), .rd_data(rq_data), .rd_ready(rq_ready));

  config_rx #(.CFG_PROTO(CFG_PROTO)) u_cfg (
    .clk, .rst_n, .in_valid(rq_valid), .in_data(rq_data[7:0]), .in_last(rq_data[8]), .in_ready(rq_ready),
    .board_id, .cmd_valid, .cmd_bits, .cmd_len, .cmd_ready,
    .run, .line_mask(line_mask8), .delay, .peer_mac, .peer_ip, .peer_port,
    .cfg_accepted, .frames_ignored);

  // A new event never starts while the previous trigger delay still runs (the
  // gate prevents it), and the receive FIFO holds a whole frame, so it never
  // refuses a byte.
  a_arm_idle: assert property (@(posedge clk) disable iff (!rst_n) arm |-> !delay_busy);
  a_rx_room:  assert property (@(posedge rx_clk) disable iff (!rst_n) rx_valid |-> rq_wready);

endmodule
