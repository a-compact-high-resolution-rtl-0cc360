// line_capture: capture of one serial data line of a front-end module.
//
// After a trigger (arm) the line is watched for the preamble pattern.  From
// the preamble on, every bit -- preamble, data and trailer -- is shifted into a
// 16-bit word, MSB first, and each full word is written to the event's
// 512-bit block of the line buffer (32 words).  When the trailer pattern has
// gone by, the last partial word is written padded with zeros and done rises;
// it stays high until the next arm.  The word pointer counts modulo 32 within
// the block: a stream longer than 512 bits wraps round and overwrites the
// block from its start, destroying the preamble, which is how the offline
// software recognises and drops such an event.  wrapped reports it.
//
// Preamble hunting after the trigger, storing preamble-data-trailer, and the
// wrap-around on overwrite follow the tracker design; the 16-bit word packing
// is this design's choice and the preamble/trailer patterns are those of the
// ABCD chip (see mst_pkg).
//
// Timing: one bit per clk.  The write of a word happens in the cycle after its
// last bit was sampled.  done rises the cycle after the final write.
module line_capture
  import mst_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              din,
  input  logic              arm,        // start hunting for a preamble
  input  logic [SLOT_W-1:0] slot,       // event block to write (held while busy)
  output logic              wr_en,
  output logic [BUF_AW-1:0] wr_addr,
  output logic [WORD_BITS-1:0] wr_data,
  output logic              done,
  output logic              wrapped     // the stream overran its block
);
  typedef enum logic [1:0] {S_IDLE, S_HUNT, S_CAPTURE, S_DONE} state_t;
  state_t state;

  localparam int unsigned WCNT_W = $clog2(BLOCK_WORDS);

  logic [PREAMBLE_LEN-2:0] pre_sr;     // last bits before the current one
  logic [14:0]             hist;       // last 15 bits of the stream
  logic [WORD_BITS-2:0]    wsr;        // bits of the word being assembled
  logic [3:0]              bitcnt;     // bits already in wsr
  logic [WCNT_W-1:0]       wcnt;       // word within the block
  logic [SLOT_W-1:0]       slot_q;
  logic                    blk_full;   // all 32 words of the block written once

  logic [WORD_BITS-1:0]    word_now;
  logic [15:0]             hist_now;
  assign word_now = {wsr, din};
  assign hist_now = {hist, din};

  assign done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pre_sr <= '0; hist <= '0; wsr <= '0; bitcnt <= '0;
      wcnt <= '0; slot_q <= '0; blk_full <= 1'b0; wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
      wrapped <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      if (arm) begin
        state <= S_HUNT; pre_sr <= '0; slot_q <= slot; wrapped <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE, S_DONE: ;
          S_HUNT: begin
            pre_sr <= {pre_sr[PREAMBLE_LEN-3:0], din};
            if ({pre_sr, din} == ABCD_PREAMBLE) begin
              state  <= S_CAPTURE;
              wsr    <= (WORD_BITS-1)'(ABCD_PREAMBLE);
              bitcnt <= 4'(PREAMBLE_LEN);
              hist   <= 15'(ABCD_PREAMBLE);
              wcnt   <= '0;
              blk_full <= 1'b0;
            end
          end
          S_CAPTURE: begin
            hist   <= hist_now[14:0];
            wsr    <= word_now[WORD_BITS-2:0];
            bitcnt <= bitcnt + 1'b1;
            if (hist_now == ABCD_TRAILER || bitcnt == 4'(WORD_BITS-1)) begin
              wr_en   <= 1'b1;
              wr_addr <= {slot_q, wcnt};
              wr_data <= word_now << (4'(WORD_BITS-1) - bitcnt);
              wcnt    <= wcnt + 1'b1;
              bitcnt  <= '0;
              if (wcnt == WCNT_W'(BLOCK_WORDS-1)) blk_full <= 1'b1;
              if (blk_full) wrapped <= 1'b1;
            end
            if (hist_now == ABCD_TRAILER) state <= S_DONE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
