// abcd_model: behavioural model of one silicon module's front end as seen by
// the readout board (two ABCD chip chains, one serial data line each).
//
// It decodes the serial command line: 110 is a level-1 trigger; 101 starts a
// configuration command, taken here as 8 bits long (such as the 10100100 soft
// reset), which is counted and otherwise ignored.  LATENCY cycles after a
// trigger command it sends, on each of its two data lines, a stream made by
// abcd_stream_pkg::make_stream with hits[line] hit records (chosen at random,
// 0..6, unless the test sets force_hits).  For checking it keeps, per line and
// per trigger, the expected 32-word buffer block and how many of its words the
// stream defines.  Not synthesizable; for testbenches only.
module abcd_model #(
  parameter int LATENCY = 20
) (
  input  logic       clk,
  input  logic       cmd_in,
  output logic [1:0] data
);
  import abcd_stream_pkg::*;

  int force_hits = -1;          // >= 0: use this many hits on both lines
  int triggers = 0, configs = 0;
  block_t exp_block [2][$];
  int     exp_words [2][$];

  initial data = 2'b00;

  // command decoder
  initial begin
    bit [2:0] h;
    forever begin
      @(posedge clk);
      if (cmd_in === 1'b1) begin
        h[2] = 1'b1;
        @(posedge clk); h[1] = cmd_in;
        @(posedge clk); h[0] = cmd_in;
        if (h == 3'b110) begin
          triggers++;
          fork
            respond(triggers);
          join_none
        end else if (h == 3'b101) begin
          configs++;
          repeat (5) @(posedge clk);
        end
      end
    end
  end

  task automatic respond(input int n);
    bitq_t q0, q1;
    block_t z;
    int h0, h1;
    foreach (z[i]) z[i] = '0;
    h0 = (force_hits >= 0) ? force_hits : $urandom_range(0, 6);
    h1 = (force_hits >= 0) ? force_hits : $urandom_range(0, 6);
    q0 = make_stream(h0, n, $urandom_range(0, 255));
    q1 = make_stream(h1, n, $urandom_range(0, 255));
    exp_block[0].push_back(expected_block(q0, z)); exp_words[0].push_back(n_words(q0) > 32 ? 32 : n_words(q0));
    exp_block[1].push_back(expected_block(q1, z)); exp_words[1].push_back(n_words(q1) > 32 ? 32 : n_words(q1));
    repeat (LATENCY) @(posedge clk);
    for (int i = 0; i < q0.size() || i < q1.size(); i++) begin
      #1;
      data[0] = (i < q0.size()) ? q0[i] : 1'b0;
      data[1] = (i < q1.size()) ? q1[i] : 1'b0;
      @(posedge clk);
    end
    #1 data = 2'b00;
  endtask
endmodule
