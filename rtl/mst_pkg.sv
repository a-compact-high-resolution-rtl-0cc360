// mst_pkg: constants and helper functions shared by the muon-tracker readout
// firmware (trigger controller and readout board).
//
// The serial-line patterns below are those of the ABCD front-end chip that
// reads out the silicon strip modules: a data stream starts with a fixed
// preamble and ends with a trailer (a one followed by fifteen zeros), and the
// level-1 trigger command on the command line is the three bits 110.  They come
// from the ABCD data format, not from the tracker design itself, which only
// names the preamble, data and trailer.  Buffer sizes follow the tracker
// design: a 16 kbit buffer per serial data line holding 32 events in 512-bit
// blocks.  The CRC-32 helper is the IEEE 802.3 frame check sequence.
package mst_pkg;

  // ABCD serial data format
  localparam logic [4:0]  ABCD_PREAMBLE  = 5'b11101;
  localparam int unsigned PREAMBLE_LEN   = 5;
  localparam logic [15:0] ABCD_TRAILER   = 16'b1000_0000_0000_0000;
  // ABCD level-1 trigger command, sent MSB first
  localparam logic [2:0]  ABCD_L1_CMD    = 3'b110;
  localparam int unsigned L1_CMD_LEN     = 3;

  // Readout buffer organisation (per serial data line)
  localparam int unsigned WORD_BITS      = 16;                       // RAM word
  localparam int unsigned BUF_BITS       = 16384;                    // 16 kbit
  localparam int unsigned EVENT_SLOTS    = 32;
  localparam int unsigned BLOCK_BITS     = BUF_BITS / EVENT_SLOTS;   // 512
  localparam int unsigned BLOCK_WORDS    = BLOCK_BITS / WORD_BITS;   // 32
  localparam int unsigned BUF_WORDS      = BUF_BITS / WORD_BITS;     // 1024
  localparam int unsigned SLOT_W         = $clog2(EVENT_SLOTS);
  localparam int unsigned BUF_AW         = $clog2(BUF_WORDS);
  localparam int unsigned BLOCK_BYTES    = BLOCK_BITS / 8;           // 64

  // Per-event payload header in the data packets: 32-bit event ID
  localparam int unsigned EV_HDR_BYTES   = 4;

  // Width of a configuration command for the ABCD command line
  localparam int unsigned CMD_W          = 64;
  localparam int unsigned CMD_LEN_W      = 7;

  // Reflected CRC-32 (polynomial 0x04C11DB7), one byte, LSB first.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ d[i]) c = (c >> 1) ^ 32'hEDB8_8320;
      else             c = c >> 1;
    end
    return c;
  endfunction

  // One's-complement sum of 16-bit words, folded, for the IPv4 header checksum.
  function automatic logic [15:0] ones_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[15:0] + {15'd0, s[16]};
  endfunction

endpackage
