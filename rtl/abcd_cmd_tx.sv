// abcd_cmd_tx: driver of the serial command line to the front-end chips.
//
// The line carries one bit per 40 MHz cycle, idle low.  Two kinds of command
// are sent: the level-1 trigger command (three bits, 110), requested by a
// one-cycle fire pulse from the trigger delay, and configuration commands of up
// to CMD_W bits that arrive left aligned (first bit in cmd_bits[CMD_W-1]) with
// their length on a valid/ready handshake.  A pending trigger wins over a
// queued configuration command; a command already on the line is finished
// first, so a trigger that arrives during a configuration command is sent
// right after it.
//
// That configuration data become a stream of serial commands, and that the
// trigger command goes to all chips, follow the tracker design; the command
// codes are those of the ABCD chip, and the priority rule is this design's.
//
// Timing: the first bit of the trigger command is on cmd_out the cycle after
// fire when the line is idle.  cmd_ready is high while the line is idle or
// sending its last bit, and no trigger is pending or being requested.
module abcd_cmd_tx
  import mst_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 fire,
  input  logic                 cmd_valid,
  input  logic [CMD_W-1:0]     cmd_bits,
  input  logic [CMD_LEN_W-1:0] cmd_len,     // 1 .. CMD_W
  output logic                 cmd_ready,
  output logic                 cmd_out,
  output logic                 busy,
  output logic [15:0]          trig_sent    // trigger commands sent
);
  logic [CMD_W-1:0]     sr;
  logic [CMD_LEN_W-1:0] left;
  logic                 trig_pend;

  logic free;   // the line can take a new command at the next edge
  assign busy      = (left != 0);
  assign free      = (left <= 1);
  assign cmd_ready = free && !trig_pend && !fire;
  assign cmd_out   = sr[CMD_W-1] & busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr <= '0; left <= '0; trig_pend <= 1'b0; trig_sent <= '0;
    end else begin
      if (fire) trig_pend <= 1'b1;
      if (busy) begin
        sr   <= sr << 1;
        left <= left - 1'b1;
      end
      if (!free) begin
        // still sending
      end else if (trig_pend || fire) begin
        sr        <= {ABCD_L1_CMD, {(CMD_W-L1_CMD_LEN){1'b0}}};
        left      <= CMD_LEN_W'(L1_CMD_LEN);
        trig_pend <= 1'b0;
        trig_sent <= trig_sent + 1'b1;
      end else if (cmd_valid && cmd_len != 0) begin
        sr   <= cmd_bits;
        left <= cmd_len;
      end
    end
  end
endmodule
