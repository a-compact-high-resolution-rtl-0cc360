// mst_readout_system: the complete digital readout of the two-station muon
// tracker -- one trigger controller and NUM_BOARDS readout boards, each
// reading four silicon modules over eight serial data lines.
//
// The trigger controller's toggling trigger line goes to every readout board;
// every board's gate goes back to the trigger controller.  Everything outside
// the FPGAs is a port: the discriminated scintillator signals, the DEPP bus of
// the USB bridge, the modules' serial data and command lines, and the RGMII
// pins of each board's Ethernet transceiver.  Each board has its own 40 MHz
// clock and RGMII clocks; in hardware the boards' clocks are independent.
//
// rst_n also disables assertions inside the boards, which lint tools report
// as a reset used both asynchronously and synchronously; this is harmless.
module mst_readout_system
  import mst_pkg::*;
#(
  parameter int unsigned NUM_BOARDS = 2,
  parameter int unsigned NUM_LINES  = 8
) (
  input  logic                                 tc_clk,
  input  logic                                 rst_n,
  input  logic [1:0]                           det,
  input  logic                                 astb_n,
  input  logic                                 dstb_n,
  input  logic                                 write_n,
  input  logic [7:0]                           db_i,
  output logic [7:0]                           db_o,
  output logic                                 db_oe,
  output logic                                 wait_o,
  output logic                                 trig_line,
  output logic                                 coinc,
  // per readout board
  input  logic [NUM_BOARDS-1:0]                rb_clk,
  input  logic [NUM_BOARDS-1:0][31:0]          board_id,
  input  logic [NUM_BOARDS-1:0][47:0]          board_mac,
  input  logic [NUM_BOARDS-1:0][31:0]          board_ip,
  input  logic [NUM_BOARDS-1:0][NUM_LINES-1:0] data_in,
  output logic [NUM_BOARDS-1:0]                cmd_out,
  input  logic [NUM_BOARDS-1:0]                tx_clk,
  output logic [NUM_BOARDS-1:0][3:0]           txd,
  output logic [NUM_BOARDS-1:0]                tx_en,
  input  logic [NUM_BOARDS-1:0]                rx_clk,
  input  logic [NUM_BOARDS-1:0][3:0]           rxd,
  input  logic [NUM_BOARDS-1:0]                rx_dv,
  output logic [NUM_BOARDS-1:0]                gate,
  output logic [NUM_BOARDS-1:0][31:0]          events_done,
  output logic [NUM_BOARDS-1:0][15:0]          packets_sent,
  output logic [NUM_BOARDS-1:0][15:0]          frames_sent,
  output logic [NUM_BOARDS-1:0][15:0]          trig_ignored,
  output logic [NUM_BOARDS-1:0][15:0]          trig_cmds_sent,
  output logic [NUM_BOARDS-1:0][15:0]          cfg_accepted,
  output logic [NUM_BOARDS-1:0][15:0]          frames_ignored,
  output logic [NUM_BOARDS-1:0][NUM_LINES-1:0] lines_wrapped,
  output logic [NUM_BOARDS-1:0]                tx_underrun
);
  trigger_controller #(.NUM_BOARDS(NUM_BOARDS)) u_tc (
    .clk(tc_clk), .rst_n, .det, .gate, .trig_out(trig_line), .coinc,
    .astb_n, .dstb_n, .write_n, .db_i, .db_o, .db_oe, .wait_o);

  for (genvar b = 0; b < NUM_BOARDS; b++) begin : g_rb
    readout_board #(.NUM_LINES(NUM_LINES)) u_rb (
      .clk(rb_clk[b]), .rst_n, .board_id(board_id[b]), .board_mac(board_mac[b]), .board_ip(board_ip[b]),
      .trig_in(trig_line), .gate(gate[b]),
      .data_in(data_in[b]), .cmd_out(cmd_out[b]),
      .tx_clk(tx_clk[b]), .txd(txd[b]), .tx_en(tx_en[b]),
      .rx_clk(rx_clk[b]), .rxd(rxd[b]), .rx_dv(rx_dv[b]),
      .events_done(events_done[b]), .packets_sent(packets_sent[b]), .frames_sent(frames_sent[b]),
      .trig_ignored(trig_ignored[b]), .trig_cmds_sent(trig_cmds_sent[b]),
      .cfg_accepted(cfg_accepted[b]), .frames_ignored(frames_ignored[b]),
      .lines_wrapped(lines_wrapped[b]), .tx_underrun(tx_underrun[b]));
  end
endmodule
