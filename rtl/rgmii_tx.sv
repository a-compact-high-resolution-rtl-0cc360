// rgmii_tx: transmit side of the Ethernet link to the external transceiver.
//
// The FPGA has no standard Ethernet MAC; this block only does the framing the
// wire needs.  For each frame taken from the byte stream (valid/ready, last on
// the final byte) it sends seven preamble bytes 0x55, the start-of-frame byte
// 0xD5, the frame bytes, and the IEEE 802.3 CRC-32 frame check sequence, then
// keeps the line idle for the 12-byte inter-frame gap.  Frames shorter than 60
// bytes are padded with zeros.  In 100 Mb/s RGMII mode every byte goes out as
// two 4-bit nibbles, low nibble first, one per 25 MHz tx_clk cycle, with tx_en
// high for the whole frame.  (RGMII transfers on both clock edges; at 100 Mb/s
// the falling-edge copy of the nibble and the TX_CTL error bit are produced by
// the FPGA's output DDR cells, which are not modelled here: txd/tx_en are the
// rising-edge values.)
//
// The tracker design uses 100BASE-TX over the transceiver's RGMII interface;
// the framing details are those of the Ethernet standard.  The input stream
// must keep up with the line once a frame has started (the packet builder is
// three times faster); underrun is flagged.
module rgmii_tx (
  input  logic       clk,          // 25 MHz tx clock
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] in_data,
  input  logic       in_last,
  output logic       in_ready,
  output logic [3:0] txd,
  output logic       tx_en,
  output logic       underrun
);
  import mst_pkg::crc32_byte;

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_DATA, S_PAD, S_FCS, S_IFG} state_t;
  state_t      state;
  logic [7:0]  cur;        // byte on the wire
  logic        hi;         // sending high nibble of cur
  logic [4:0]  cnt;        // byte counter for preamble / FCS / gap
  logic [6:0]  nbytes;     // frame bytes sent, saturating
  logic [31:0] crc;
  logic        last_q;

  assign txd   = hi ? cur[7:4] : cur[3:0];
  // a new byte is taken from the stream on the low-to-high nibble turnover
  assign in_ready = hi && (((state == S_DATA) && !last_q) || ((state == S_PRE) && cnt == 5'd7));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; hi <= 1'b0; cnt <= '0; nbytes <= '0;
      crc <= '1; last_q <= 1'b0; tx_en <= 1'b0; underrun <= 1'b0;
    end else begin
      hi <= ~hi;
      unique case (state)
        S_IDLE: begin
          hi <= 1'b0; tx_en <= 1'b0;
          if (in_valid) begin
            state <= S_PRE; cur <= 8'h55; cnt <= '0; tx_en <= 1'b1;
          end
        end
        S_PRE: if (hi) begin
          cnt <= cnt + 1'b1;
          if (cnt == 5'd6) cur <= 8'hD5;
          if (cnt == 5'd7) begin
            // first frame byte
            state <= S_DATA; cur <= in_data; crc <= crc32_byte('1, in_data);
            last_q <= in_last; nbytes <= 7'd1;
            if (!in_valid) underrun <= 1'b1;
          end
        end
        S_DATA: if (hi) begin
          if (!last_q) begin
            cur <= in_data; crc <= crc32_byte(crc, in_data); last_q <= in_last;
            if (nbytes != 7'h7F) nbytes <= nbytes + 1'b1;
            if (!in_valid) underrun <= 1'b1;
          end else if (nbytes < 7'd60) begin
            state <= S_PAD; cur <= 8'h00; crc <= crc32_byte(crc, 8'h00); nbytes <= nbytes + 1'b1;
          end else begin
            state <= S_FCS; cur <= ~crc[7:0]; cnt <= 5'd1;
          end
        end
        S_PAD: if (hi) begin
          if (nbytes < 7'd60) begin
            cur <= 8'h00; crc <= crc32_byte(crc, 8'h00); nbytes <= nbytes + 1'b1;
          end else begin
            state <= S_FCS; cur <= ~crc[7:0]; cnt <= 5'd1;
          end
        end
        S_FCS: if (hi) begin
          cnt <= cnt + 1'b1;
          unique case (cnt)
            5'd1: cur <= ~crc[15:8];
            5'd2: cur <= ~crc[23:16];
            5'd3: cur <= ~crc[31:24];
            default: begin state <= S_IFG; cnt <= '0; tx_en <= 1'b0; cur <= '0; end
          endcase
        end
        S_IFG: begin
          tx_en <= 1'b0;
          if (hi) begin
            cnt <= cnt + 1'b1;
            if (cnt == 5'd11) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
