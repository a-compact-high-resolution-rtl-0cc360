// readout_ctrl: event control of the readout board.
//
// Keeps a ring of 32 event slots (one 512-bit block per line buffer each).
// When a trigger arrives and the board is ready, it raises the gate towards the
// trigger controller (which blocks further triggers), arms every line capture
// for the current write slot and starts the trigger delay (arm).  When every
// enabled line has seen its trailer, the event is complete: the write slot
// advances, the event becomes available to the packet builder and the gate
// drops.  The packet builder returns slots with ev_release, oldest first.
//
// The gate is high while an event is being captured (as in the tracker
// design), and, as this design's choice, also while all 32 slots hold unsent
// events or the run is disabled, so that no trigger is accepted that could not
// be stored.  A trigger that arrives while the gate is high is ignored and
// counted in trig_ignored.  Lines cleared in line_mask count as done.
//
// Timing: arm and the gate rise the cycle after trig.  The gate falls, and
// ev_avail grows, the cycle after the last line reports done.
//
// rst_n also disables the assertion at the end, which lint tools report as a
// reset used both asynchronously and synchronously; this is harmless.
module readout_ctrl
  import mst_pkg::*;
#(
  parameter int unsigned NUM_LINES = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 run,
  input  logic [NUM_LINES-1:0] line_mask,   // 1: line enabled
  input  logic                 trig,
  input  logic [NUM_LINES-1:0] line_done,
  input  logic                 ev_release,
  output logic                 gate,
  output logic                 arm,
  output logic [SLOT_W-1:0]    wr_slot,
  output logic [SLOT_W:0]      ev_avail,    // complete, unsent events
  output logic [31:0]          rd_event_id, // ID of the oldest unsent event
  output logic [31:0]          events_done,
  output logic [15:0]          trig_ignored
);
  typedef enum logic {S_IDLE, S_BUSY} state_t;
  state_t state;

  logic [31:0] wr_ptr, rd_ptr;   // event numbers
  logic        full;

  assign wr_slot     = wr_ptr[SLOT_W-1:0];
  assign ev_avail    = (SLOT_W+1)'(wr_ptr - rd_ptr);
  assign rd_event_id = rd_ptr;
  assign events_done = wr_ptr;
  assign full        = (ev_avail == (SLOT_W+1)'(EVENT_SLOTS));
  assign gate        = (state == S_BUSY) || full || !run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; wr_ptr <= '0; rd_ptr <= '0; arm <= 1'b0; trig_ignored <= '0;
    end else begin
      arm <= 1'b0;
      if (ev_release && ev_avail != 0) rd_ptr <= rd_ptr + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (trig) begin
            if (run && !full) begin
              arm <= 1'b1; state <= S_BUSY;
            end else begin
              trig_ignored <= trig_ignored + 1'b1;
            end
          end
        end
        S_BUSY: begin
          if (trig) trig_ignored <= trig_ignored + 1'b1;
          if (!arm && &(line_done | ~line_mask)) begin
            wr_ptr <= wr_ptr + 1'b1; state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The builder never releases an event that is not there.
  a_release: assert property (@(posedge clk) disable iff (!rst_n) ev_release |-> ev_avail != 0);
endmodule
