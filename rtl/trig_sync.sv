// trig_sync: trigger receiver of the readout board.
//
// The trigger controller signals a trigger by toggling one line, asynchronous
// to the readout board clock.  The line is registered on the 40 MHz clock (two
// flip-flops against metastability), and every change of the registered level
// becomes a one-cycle trig_pulse.  Changes seen in the first cycles after reset
// are ignored, so a line that is already high at reset is not a trigger.
//
// Registering the toggle on the 40 MHz clock follows the tracker design; the
// second synchroniser stage (one cycle more latency than the single register
// the design describes) and the reset blanking are this design's choices.
//
// Timing: trig_pulse is high for one cycle, 2 to 3 cycles after trig_in changes.
module trig_sync (
  input  logic clk,
  input  logic rst_n,
  input  logic trig_in,
  output logic trig_pulse
);
  logic s1, s2, s3;
  logic [1:0] blank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= 1'b0; s2 <= 1'b0; s3 <= 1'b0;
      blank <= 2'd3;
      trig_pulse <= 1'b0;
    end else begin
      s1 <= trig_in; s2 <= s1; s3 <= s2;
      if (blank != 0) blank <= blank - 1'b1;
      trig_pulse <= (blank == 0) && (s2 ^ s3);
    end
  end
endmodule
