// trigger_controller: FPGA firmware of the trigger controller board.
//
// The board takes the two discriminated scintillator signals (discrimination
// itself is analog, on a plugin card), forms their coincidence and sends each
// accepted coincidence to all readout boards by toggling one trigger line.
// The readout boards each return a gate while they are busy; the gates are
// ORed and block further triggers.  A periodic trigger (100 Hz by default)
// can replace the coincidence, for threshold scans.  Enable, mode and period
// are set, and the trigger and coincidence counters read, over the DEPP
// parallel port from the USB bridge.
//
// Clock: clk, 40 MHz.  The coincidence path itself is asynchronous (see
// tc_trigger).  NUM_BOARDS gate inputs.
module trigger_controller #(
  parameter int unsigned NUM_BOARDS = 2,
  parameter logic [23:0] PERIOD_DEFAULT = 24'd400000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [1:0]            det,
  input  logic [NUM_BOARDS-1:0] gate,
  output logic                  trig_out,
  output logic                  coinc,
  // DEPP bus from the USB bridge
  input  logic                  astb_n,
  input  logic                  dstb_n,
  input  logic                  write_n,
  input  logic [7:0]            db_i,
  output logic [7:0]            db_o,
  output logic                  db_oe,
  output logic                  wait_o
);
  logic        enable, periodic_mode;
  logic [23:0] period;
  logic [31:0] trig_count, coinc_count;

  tc_trigger #(.PERIOD_W(24)) u_trig (
    .clk, .rst_n, .det, .gate(|gate), .enable, .periodic_mode, .period,
    .coinc, .trig_out, .trig_count, .coinc_count);

  depp_regs #(.PERIOD_DEFAULT(PERIOD_DEFAULT)) u_regs (
    .clk, .rst_n, .astb_n, .dstb_n, .write_n, .db_i, .db_o, .db_oe, .wait_o,
    .enable, .periodic_mode, .period, .trig_count, .coinc_count);
endmodule
