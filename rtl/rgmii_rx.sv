// rgmii_rx: receive side of the Ethernet link from the external transceiver.
//
// At 100 Mb/s the transceiver delivers one 4-bit nibble per 25 MHz rx_clk
// cycle, low nibble first, with rx_dv high for the frame.  This block waits
// for the start-of-frame nibble pair (0x5 then 0xD after the 0x5 preamble
// nibbles), then joins nibble pairs into bytes and hands them on as a stream
// (valid for one cycle per byte, no back-pressure: a byte every two cycles).
// Each byte is held until the next one arrives, so the final byte of the frame
// can be marked last when rx_dv falls.  The four FCS bytes are passed on like
// data and the FCS is not checked; the receiver of the stream ignores them.
//
// The tracker design receives its configuration over this Ethernet link; the
// nibble order and framing are those of the Ethernet/RGMII standards.
module rgmii_rx (
  input  logic       clk,          // 25 MHz rx clock
  input  logic       rst_n,
  input  logic [3:0] rxd,
  input  logic       rx_dv,
  output logic       out_valid,
  output logic [7:0] out_data,
  output logic       out_last
);
  typedef enum logic [1:0] {S_IDLE, S_PRE, S_DATA} state_t;
  state_t     state;
  logic       hi;          // next nibble is the high one
  logic [3:0] lo_nib;
  logic [7:0] held;
  logic       have;        // held is a byte not yet passed on

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; hi <= 1'b0; lo_nib <= '0; held <= '0; have <= 1'b0;
      out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0; out_last <= 1'b0;
      if (!rx_dv) begin
        if (have) begin
          out_valid <= 1'b1; out_data <= held; out_last <= 1'b1;
        end
        have <= 1'b0; state <= S_IDLE; hi <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE: if (rxd == 4'h5) state <= S_PRE;
          S_PRE: begin
            if (rxd == 4'hD) begin state <= S_DATA; hi <= 1'b0; end
            else if (rxd != 4'h5) state <= S_IDLE;
          end
          S_DATA: begin
            hi <= ~hi;
            if (!hi) lo_nib <= rxd;
            else begin
              if (have) begin out_valid <= 1'b1; out_data <= held; end
              held <= {rxd, lo_nib}; have <= 1'b1;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
