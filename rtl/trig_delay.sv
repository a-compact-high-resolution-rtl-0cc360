// trig_delay: programmable trigger latency.
//
// After a trigger the readout board waits a user-defined number of clock
// cycles before it sends the trigger command to the front-end chips, so that
// the command meets the muon signal at the end of the front-end pipeline.
// start loads the counter with delay; fire pulses for one cycle when it has
// run out.  With delay = N, fire is high N+1 cycles after start (delay = 0:
// the next cycle).  A start while counting restarts the count.
//
// The countdown follows the tracker design; the width is this design's choice.
module trig_delay #(
  parameter int unsigned DELAY_W = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [DELAY_W-1:0] delay,
  output logic               fire,
  output logic               busy
);
  logic [DELAY_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; busy <= 1'b0; fire <= 1'b0;
    end else begin
      fire <= 1'b0;
      if (start) begin
        if (delay == 0) begin
          busy <= 1'b0; fire <= 1'b1;
        end else begin
          cnt <= delay - 1'b1; busy <= 1'b1;
        end
      end else if (busy) begin
        if (cnt == 0) begin
          busy <= 1'b0; fire <= 1'b1;
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end
endmodule
