// packet_builder: formats stored events into Ethernet/IPv4/TCP data packets.
//
// Whenever complete events wait in the line buffers, up to MAX_EVENTS of them
// (oldest first) are put into one multi-event packet.  The TCP payload holds,
// per event, the 32-bit event ID followed by the 512-bit block of each of the
// NUM_LINES serial lines in line order, each block as 32 big-endian 16-bit
// words.  The TCP sequence number carries the ID of the first event, so the
// receiver can compare the event IDs of the two readout boards and resynchronise
// them.  An IP datagram longer than FRAG_BYTES of payload is split into IPv4
// fragments (more-fragments flag, offset in 8-byte units), each sent as its own
// Ethernet frame with its own Ethernet and IPv4 headers and a correct IPv4
// header checksum.  The TCP checksum is sent as zero (there is no TCP stack;
// the receiver is the tracker's own software).  Each frame leaves as a byte
// stream (valid/ready, last on the final byte); preamble and FCS are added by
// rgmii_tx.  A slot is handed back (ev_release) as soon as its last byte has
// been read.
//
// Multi-event packets, Ethernet and TCP/IP headers, fragmentation and event
// IDs in the headers follow the tracker design; the payload layout, where the
// event ID sits, MAX_EVENTS and the zero TCP checksum are this design's
// choices.
//
// Timing: header bytes go out one per cycle; buffer words take three cycles for
// two bytes (address, then high byte, then low byte) because the RAM read is
// registered.  Any stall of out_ready just holds the stream.
module packet_builder
  import mst_pkg::*;
#(
  parameter int unsigned NUM_LINES  = 8,
  parameter int unsigned MAX_EVENTS = 4,
  parameter int unsigned FRAG_BYTES = 1480    // IP payload per fragment, multiple of 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // event ring
  input  logic [SLOT_W:0]      ev_avail,
  input  logic [31:0]          rd_event_id,
  output logic                 ev_release,
  // line buffers
  output logic [BUF_AW-1:0]    rd_addr,
  input  logic [WORD_BITS-1:0] rd_data [NUM_LINES],
  // addresses
  input  logic [47:0]          src_mac,
  input  logic [47:0]          dst_mac,
  input  logic [31:0]          src_ip,
  input  logic [31:0]          dst_ip,
  input  logic [15:0]          src_port,
  input  logic [15:0]          dst_port,
  // frame byte stream
  output logic                 out_valid,
  output logic [7:0]           out_data,
  output logic                 out_last,
  input  logic                 out_ready,
  output logic [15:0]          packets_sent,
  output logic [15:0]          frames_sent
);
  localparam int unsigned EV_BYTES  = EV_HDR_BYTES + NUM_LINES * BLOCK_BYTES;
  localparam int unsigned TCP_BYTES = 20;
  localparam int unsigned HDR_BYTES = 34;   // Ethernet 14 + IPv4 20
  localparam int unsigned LINE_W    = (NUM_LINES > 1) ? $clog2(NUM_LINES) : 1;
  localparam int unsigned WCNT_W    = $clog2(BLOCK_WORDS);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_BODY, S_END} state_t;
  typedef enum logic [1:0] {C_TCP, C_EVHDR, C_DATA} sect_t;

  state_t              state;
  sect_t               sect;
  logic [5:0]          hidx;       // Ethernet/IPv4 header byte index
  logic [4:0]          cidx;       // TCP header / event-ID byte index
  logic [LINE_W-1:0]   line;
  logic [WCNT_W-1:0]   word;
  logic                lo;         // low byte of the word is next
  logic [SLOT_W:0]     ev_i;       // event within the packet
  logic [31:0]         first_id;
  logic [15:0]         plen;       // IP payload length of the whole datagram
  logic [15:0]         ppos;       // IP payload bytes sent
  logic [15:0]         frag_start, frag_len;
  logic [15:0]         pkt_id;
  logic [BUF_AW-1:0]   rd_addr_q;

  logic [31:0] cur_id;
  assign cur_id  = first_id + 32'(ev_i);
  assign rd_addr = {cur_id[SLOT_W-1:0], word};

  // ---- Ethernet + IPv4 header of the current fragment ----
  logic [15:0] ip_total, ip_flags_off, ip_csum;
  logic        mf;
  assign mf           = (frag_start + frag_len) != plen;
  assign ip_total     = 16'(20) + frag_len;
  assign ip_flags_off = {2'b00, mf, frag_start[15:3]};

  always_comb begin
    logic [15:0] s;
    s = 16'h4500;
    s = ones_add(s, ip_total);
    s = ones_add(s, pkt_id);
    s = ones_add(s, ip_flags_off);
    s = ones_add(s, 16'h4006);            // TTL 64, protocol TCP
    s = ones_add(s, src_ip[31:16]);
    s = ones_add(s, src_ip[15:0]);
    s = ones_add(s, dst_ip[31:16]);
    s = ones_add(s, dst_ip[15:0]);
    ip_csum = ~s;
  end

  logic [8*HDR_BYTES-1:0] hdr_vec;
  assign hdr_vec = {dst_mac, src_mac, 16'h0800,
                    16'h4500, ip_total, pkt_id, ip_flags_off, 16'h4006, ip_csum,
                    src_ip, dst_ip};

  logic [8*TCP_BYTES-1:0] tcp_vec;
  assign tcp_vec = {src_port, dst_port, first_id, 32'd0,
                    8'h50, 8'h18, 16'hFFFF, 16'h0000, 16'h0000};

  // ---- byte at the cursor ----
  logic       byte_ok;
  logic [7:0] body_byte;
  logic [WORD_BITS-1:0] word_data;
  assign word_data = rd_data[line];

  always_comb begin
    byte_ok   = 1'b1;
    body_byte = 8'h00;
    unique case (sect)
      C_TCP:   body_byte = tcp_vec[8*(TCP_BYTES-1-32'(cidx)) +: 8];
      C_EVHDR: body_byte = cur_id[8*(3-32'(cidx[1:0])) +: 8];
      C_DATA: begin
        byte_ok   = (rd_addr_q == rd_addr);
        body_byte = lo ? word_data[7:0] : word_data[15:8];
      end
      default: ;
    endcase
  end

  logic can_load;
  assign can_load = !out_valid || out_ready;

  // size of a new packet: up to MAX_EVENTS of the waiting events
  logic [SLOT_W:0] new_nev;
  logic [15:0]     new_plen;
  assign new_nev  = (ev_avail > (SLOT_W+1)'(MAX_EVENTS)) ? (SLOT_W+1)'(MAX_EVENTS) : ev_avail;
  assign new_plen = 16'(TCP_BYTES) + 16'(new_nev) * 16'(EV_BYTES);

  logic last_frag_byte;
  assign last_frag_byte = (ppos + 16'd1) == (frag_start + frag_len);

  logic [15:0] left_after;   // payload bytes after this fragment's start
  assign left_after = plen - (ppos + 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sect <= C_TCP; hidx <= '0; cidx <= '0; line <= '0; word <= '0; lo <= 1'b0;
      ev_i <= '0; first_id <= '0; plen <= '0; ppos <= '0;
      frag_start <= '0; frag_len <= '0; pkt_id <= '0; rd_addr_q <= '0;
      out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0; ev_release <= 1'b0;
      packets_sent <= '0; frames_sent <= '0;
    end else begin
      rd_addr_q  <= rd_addr;
      ev_release <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (ev_avail != 0) begin
            logic [SLOT_W:0] n;
            logic [15:0]     l;
            n = (ev_avail > (SLOT_W+1)'(MAX_EVENTS)) ? (SLOT_W+1)'(MAX_EVENTS) : ev_avail;
            l = 16'(TCP_BYTES) + 16'(n) * 16'(EV_BYTES);
            plen <= l; first_id <= rd_event_id; ev_i <= '0;
            ppos <= '0; frag_start <= '0;
            frag_len <= (new_plen > 16'(FRAG_BYTES)) ? 16'(FRAG_BYTES) : new_plen;
            sect <= C_TCP; hidx <= '0; cidx <= '0; line <= '0; word <= '0; lo <= 1'b0;
            state <= S_HDR;
          end
        end
        S_HDR: if (can_load) begin
          out_valid <= 1'b1; out_last <= 1'b0;
          out_data  <= hdr_vec[8*(HDR_BYTES-1-32'(hidx)) +: 8];
          if (hidx == 6'(HDR_BYTES-1)) begin
            state <= S_BODY;
            hidx  <= '0;
          end else begin
            hidx <= hidx + 1'b1;
          end
        end
        S_BODY: if (can_load && byte_ok) begin
          out_valid <= 1'b1;
          out_data  <= body_byte;
          out_last  <= last_frag_byte;
          ppos      <= ppos + 16'd1;
          // advance the cursor
          unique case (sect)
            C_TCP: begin
              if (cidx == 5'(TCP_BYTES-1)) begin sect <= C_EVHDR; cidx <= '0; end
              else cidx <= cidx + 1'b1;
            end
            C_EVHDR: begin
              if (cidx == 5'd3) begin sect <= C_DATA; cidx <= '0; line <= '0; word <= '0; lo <= 1'b0; end
              else cidx <= cidx + 1'b1;
            end
            C_DATA: begin
              lo <= ~lo;
              if (lo) begin
                word <= word + 1'b1;
                if (word == WCNT_W'(BLOCK_WORDS-1)) begin
                  line <= line + 1'b1;
                  if (line == LINE_W'(NUM_LINES-1)) begin
                    line <= '0;
                    ev_release <= 1'b1;
                    ev_i <= ev_i + 1'b1;
                    sect <= C_EVHDR; cidx <= '0;
                  end
                end
              end
            end
            default: ;
          endcase
          if (last_frag_byte) begin
            frames_sent <= frames_sent + 1'b1;
            if (ppos + 16'd1 == plen) begin
              state <= S_END;     // let the event controller count the last release
              pkt_id <= pkt_id + 1'b1;
              packets_sent <= packets_sent + 1'b1;
            end else begin
              state      <= S_HDR;
              frag_start <= ppos + 16'd1;
              frag_len   <= (left_after > 16'(FRAG_BYTES)) ? 16'(FRAG_BYTES) : left_after;
            end
          end
        end
        S_END: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
