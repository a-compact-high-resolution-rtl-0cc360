// tb_readout_ctrl: plays line captures and the packet builder around the event
// controller and checks: gate and arm rise the cycle after a trigger; the gate
// stays high until the last enabled line is done and falls the cycle after;
// slots advance; triggers are refused while busy, while all 32 slots are
// unsent, and while the run is off; masked lines do not hold an event; slots
// come back with ev_release.
module tb_readout_ctrl;
  import mst_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, trig = 0, ev_release = 0;
  logic [7:0] line_mask = 8'hFF, line_done = 8'h00;
  logic gate, arm;
  logic [SLOT_W-1:0] wr_slot;
  logic [SLOT_W:0] ev_avail;
  logic [31:0] rd_event_id, events_done;
  logic [15:0] trig_ignored;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  readout_ctrl #(.NUM_LINES(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one trigger; lines finish one by one in random order; returns accepted
  task automatic event_cycle(input int n, output bit accepted);
    logic [7:0] order_done;
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    accepted = arm;
    if (!accepted) return;
    check(gate, $sformatf("ev %0d: gate with arm", n));
    check(wr_slot == SLOT_W'(n), $sformatf("ev %0d: slot %0d", n, wr_slot));
    @(negedge clk); line_done = 8'h00;      // captures clear done after arm
    order_done = 8'h00;
    while ((order_done | ~line_mask) != 8'hFF) begin
      repeat ($urandom_range(1, 6)) @(negedge clk);
      check(gate, "gate high while lines busy");
      order_done[$urandom_range(0, 7)] = 1'b1;
      line_done = order_done;
    end
    @(negedge clk);
    check(!gate || ev_avail == 6'd32, $sformatf("ev %0d: gate falls after the last trailer", n));
  endtask

  initial begin
    bit acc;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(gate, "gate high while run is off");
    event_cycle(0, acc);
    check(!acc && trig_ignored == 1, "trigger refused while run is off");
    run = 1; @(negedge clk);
    check(!gate, "gate low when running and idle");
    for (int n = 0; n < 5; n++) begin
      event_cycle(n, acc);
      check(acc, $sformatf("event %0d accepted", n));
    end
    check(ev_avail == 5 && events_done == 5, "five events available");
    // trigger while busy is ignored
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    @(negedge clk); line_done = 0;
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    check(trig_ignored == 2, "trigger during busy ignored");
    line_done = 8'hFF; @(negedge clk); @(negedge clk);
    check(!gate && ev_avail == 6, "sixth event complete");
    // masked lines
    line_mask = 8'b0000_1111;
    event_cycle(6, acc);
    check(acc && ev_avail == 7, "masked lines ignored");
    line_mask = 8'hFF;
    // release two
    check(rd_event_id == 0, "oldest is event 0");
    @(negedge clk); ev_release = 1; @(negedge clk); @(negedge clk); ev_release = 0;
    check(rd_event_id == 2 && ev_avail == 5, "two released");
    // fill the ring
    for (int n = 7; n < 34; n++) begin
      event_cycle(n, acc);
      check(acc, $sformatf("event %0d accepted", n));
    end
    check(ev_avail == 32 && gate, "ring full: gate held");
    event_cycle(34, acc);
    check(!acc, "trigger refused while full");
    @(negedge clk); ev_release = 1; @(negedge clk); ev_release = 0;
    @(negedge clk);
    check(!gate && ev_avail == 31, "gate drops when a slot is freed");
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
