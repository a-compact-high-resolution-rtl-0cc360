// tc_trigger: trigger logic of the trigger controller.
//
// Two discriminated scintillator signals are ANDed into a coincidence.  Each
// coincidence that arrives while the readout boards' gate is low and the
// trigger is enabled flips a toggle flip-flop; the readout boards detect every
// change of level on the trigger line.  The toggle flip-flop is clocked by the
// coincidence itself, so a coincidence shorter than a clock period is not
// lost (the coincidence is asynchronous to the 40 MHz clock).  A second toggle
// flip-flop, in the clk domain, is flipped by a programmable period counter
// (the periodic trigger used for threshold scans, 100 Hz by default).
// periodic_mode selects which source is active.  trig_out is the XOR of both
// toggles, so a flip of either one is one trigger.
//
// The AND coincidence, the toggling output and the veto by the gate follow the
// tracker design; the periodic source living here, the XOR merge, the enable
// and the trigger counter are this design's choices.
//
// Timing: trig_out changes at the rising edge of the coincidence (coincidence
// mode) or one clk cycle after the period counter expires (periodic mode).
// trig_count (triggers sent) and coinc_count (all coincidences) count in the
// clk domain, two to three cycles late; two events closer than about two clk
// cycles are counted once.
module tc_trigger #(
  parameter int unsigned PERIOD_W = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [1:0]          det,            // discriminated scintillator signals
  input  logic                gate,           // high: readout busy, no triggers
  input  logic                enable,
  input  logic                periodic_mode,  // 0: coincidence, 1: periodic
  input  logic [PERIOD_W-1:0] period,         // periodic trigger interval in clk cycles
  output logic                coinc,          // coincidence (monitor)
  output logic                trig_out,       // toggling trigger line
  output logic [31:0]         trig_count,
  output logic [31:0]         coinc_count     // all coincidences, vetoed or not
);

  // ---- coincidence path (asynchronous) ----
  logic coinc_en;
  logic t_coinc, t_periodic;

  assign coinc = det[0] & det[1];

  // Enable seen by the coincidence flip-flop.  gate is sampled directly by the
  // coincidence edge (it is a slow level from the readout boards).
  assign coinc_en = enable & ~periodic_mode & ~gate;

  logic t_all;   // flips on every coincidence, for the coincidence counter
  always_ff @(posedge coinc or negedge rst_n) begin
    if (!rst_n) begin
      t_coinc <= 1'b0; t_all <= 1'b0;
    end else begin
      t_all <= ~t_all;
      if (coinc_en) t_coinc <= ~t_coinc;
    end
  end

  // ---- periodic path (clk domain) ----
  logic                gate_s1, gate_s2;
  logic [PERIOD_W-1:0] pcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gate_s1 <= 1'b0; gate_s2 <= 1'b0;
      pcnt <= '0; t_periodic <= 1'b0;
    end else begin
      gate_s1 <= gate; gate_s2 <= gate_s1;
      if (!(enable && periodic_mode)) begin
        pcnt <= '0;
      end else if (pcnt >= period - 1'b1) begin
        pcnt <= '0;
        if (!gate_s2) t_periodic <= ~t_periodic;   // a period that hits a busy gate is skipped
      end else begin
        pcnt <= pcnt + 1'b1;
      end
    end
  end

  assign trig_out = t_coinc ^ t_periodic;

  // ---- trigger counter (clk domain) ----
  logic out_s1, out_s2, out_s3;
  logic all_s1, all_s2, all_s3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_s1 <= 1'b0; out_s2 <= 1'b0; out_s3 <= 1'b0;
      all_s1 <= 1'b0; all_s2 <= 1'b0; all_s3 <= 1'b0;
      trig_count <= '0; coinc_count <= '0;
    end else begin
      out_s1 <= trig_out; out_s2 <= out_s1; out_s3 <= out_s2;
      all_s1 <= t_all;    all_s2 <= all_s1; all_s3 <= all_s2;
      if (out_s2 ^ out_s3) trig_count  <= trig_count + 1'b1;
      if (all_s2 ^ all_s3) coinc_count <= coinc_count + 1'b1;
    end
  end

endmodule
