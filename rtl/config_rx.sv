// config_rx: configuration packet receiver of the readout board.
//
// The board is configured at the start of a run by one Ethernet/IPv4/TCP
// packet.  This block reads the received frame byte by byte and accepts it only
// if it is IPv4 (EtherType 0x0800, version 4 with a 20-byte header) carrying
// TCP (protocol 6) with a 20-byte TCP header, and if its payload begins with
// the configuration protocol number CFG_PROTO and the board's own 32-bit
// identifier.  Any other frame is ignored to its end.  Payload of an accepted
// packet, after protocol number and identifier (all big endian):
//   byte 0     flags: bit0 run (data acquisition enabled)
//   byte 1     line mask: bit i enables serial data line i
//   bytes 2-3  trigger delay in 40 MHz cycles
//   byte 4     number of front-end commands N
//   then N x { length in bits L (1..CMD_W), ceil(L/8) bytes, first bit in the MSB }
// Each command is handed to the command-line serialiser on a valid/ready
// handshake (left aligned in cmd_bits); the input stream is stalled meanwhile.
// The sender's MAC and IP address and TCP port become the destination of the
// data packets.
//
// Filtering on protocol number and unique identifier, and turning the
// configuration into serial front-end commands, follow the tracker design; the
// payload layout and the value of CFG_PROTO are this design's choices.
//
// Timing: in_ready is low while a command waits for cmd_ready; otherwise one
// byte per cycle is consumed.  Settings change as their bytes are read.
module config_rx
  import mst_pkg::*;
#(
  parameter logic [15:0] CFG_PROTO = 16'h4D53
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [7:0]           in_data,
  input  logic                 in_last,
  output logic                 in_ready,
  input  logic [31:0]          board_id,
  // front-end commands
  output logic                 cmd_valid,
  output logic [CMD_W-1:0]     cmd_bits,
  output logic [CMD_LEN_W-1:0] cmd_len,
  input  logic                 cmd_ready,
  // settings
  output logic                 run,
  output logic [7:0]           line_mask,
  output logic [15:0]          delay,
  output logic [47:0]          peer_mac,
  output logic [31:0]          peer_ip,
  output logic [15:0]          peer_port,
  output logic [15:0]          cfg_accepted,
  output logic [15:0]          frames_ignored
);
  typedef enum logic [2:0] {S_HDR, S_CMDLEN, S_CMDDATA, S_CMDOUT, S_SKIP} state_t;
  state_t      state;
  logic [6:0]  pos;          // byte position in the frame, for the fixed part
  logic [47:0] mac_sh;
  logic [31:0] ip_sh;
  logic [15:0] port_sh;
  logic [7:0]  ncmd;
  logic [3:0]  nbytes, bidx;
  logic        eof_seen;

  localparam int unsigned PAY = 54;   // payload offset: 14 + 20 + 20

  assign in_ready  = (state != S_CMDOUT);
  assign cmd_valid = (state == S_CMDOUT);

  logic take;
  assign take = in_valid && in_ready;

  // does the byte at pos fit the expected header?
  logic bad;
  always_comb begin
    bad = 1'b0;
    unique case (pos)
      7'd12: bad = (in_data != 8'h08);
      7'd13: bad = (in_data != 8'h00);
      7'd14: bad = (in_data != 8'h45);
      7'd23: bad = (in_data != 8'h06);
      7'd46: bad = (in_data[7:4] != 4'd5);
      7'(PAY+0): bad = (in_data != CFG_PROTO[15:8]);
      7'(PAY+1): bad = (in_data != CFG_PROTO[7:0]);
      7'(PAY+2): bad = (in_data != board_id[31:24]);
      7'(PAY+3): bad = (in_data != board_id[23:16]);
      7'(PAY+4): bad = (in_data != board_id[15:8]);
      7'(PAY+5): bad = (in_data != board_id[7:0]);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_HDR; pos <= '0; mac_sh <= '0; ip_sh <= '0; port_sh <= '0;
      ncmd <= '0; nbytes <= '0; bidx <= '0; eof_seen <= 1'b0;
      cmd_bits <= '0; cmd_len <= '0;
      run <= 1'b0; line_mask <= '1; delay <= '0;
      peer_mac <= '1; peer_ip <= '1; peer_port <= '0;
      cfg_accepted <= '0; frames_ignored <= '0;
    end else begin
      unique case (state)
        S_HDR: if (take) begin
          pos <= pos + 1'b1;
          if (pos >= 7'd6  && pos <= 7'd11) mac_sh  <= {mac_sh[39:0], in_data};
          if (pos >= 7'd26 && pos <= 7'd29) ip_sh   <= {ip_sh[23:0], in_data};
          if (pos == 7'd34 || pos == 7'd35) port_sh <= {port_sh[7:0], in_data};
          if (pos == 7'(PAY+6)) begin
            run <= in_data[0];
            peer_mac <= mac_sh; peer_ip <= ip_sh; peer_port <= port_sh;
            cfg_accepted <= cfg_accepted + 1'b1;
          end
          if (pos == 7'(PAY+7)) line_mask <= in_data;
          if (pos == 7'(PAY+8)) delay[15:8] <= in_data;
          if (pos == 7'(PAY+9)) delay[7:0]  <= in_data;
          if (pos == 7'(PAY+10)) begin
            ncmd <= in_data;
            state <= (in_data == 0) ? S_SKIP : S_CMDLEN;
          end
          if (bad) begin
            state <= S_SKIP;
            frames_ignored <= frames_ignored + 1'b1;
          end
          if (in_last) begin
            state <= S_HDR; pos <= '0;
            if (!bad && pos < 7'(PAY+6)) frames_ignored <= frames_ignored + 1'b1;
          end
        end
        S_CMDLEN: if (take) begin
          if (in_data == 0 || in_data > 8'(CMD_W)) begin
            state <= S_SKIP;
          end else begin
            cmd_len  <= CMD_LEN_W'(in_data);
            nbytes   <= 4'((in_data + 8'd7) >> 3);
            bidx     <= '0;
            cmd_bits <= '0;
            state    <= S_CMDDATA;
          end
          if (in_last) begin state <= S_HDR; pos <= '0; end
        end
        S_CMDDATA: if (take) begin
          cmd_bits[(CMD_W-8) - 8*int'(bidx) +: 8] <= in_data;
          bidx <= bidx + 1'b1;
          eof_seen <= in_last;
          if (bidx + 1'b1 == nbytes) state <= S_CMDOUT;
          else if (in_last) begin state <= S_HDR; pos <= '0; end
        end
        S_CMDOUT: if (cmd_ready) begin
          ncmd <= ncmd - 1'b1;
          if (eof_seen) begin state <= S_HDR; pos <= '0; end
          else          state <= (ncmd == 8'd1) ? S_SKIP : S_CMDLEN;
        end
        S_SKIP: if (take && in_last) begin state <= S_HDR; pos <= '0; end
        default: state <= S_HDR;
      endcase
    end
  end
endmodule
