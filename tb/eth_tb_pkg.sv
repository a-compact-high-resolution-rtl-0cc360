// eth_tb_pkg: test helpers for the Ethernet side of the readout board.
//
// make_config builds a configuration frame as the control PC sends it:
// Ethernet header, IPv4 header (20 bytes, protocol TCP), TCP header (20
// bytes), then the payload: 16-bit protocol number, 32-bit board identifier,
// flags, line mask, 16-bit trigger delay, command count and the commands
// (length in bits, then the bits left aligned, MSB first).  The IPv4 and TCP
// checksums are left zero; the readout board does not check them.
// crc32 is the Ethernet frame check sequence.
package eth_tb_pkg;
  typedef byte unsigned bq_t[$];
  typedef struct { int len; logic [63:0] bits; } cmd_t;
  typedef cmd_t cmdq_t[$];
  typedef logic [15:0] evdata_t [8][32];   // one event: 8 lines x 32 words

  function automatic void put16(ref bq_t q, input logic [15:0] v);
    q.push_back(v[15:8]); q.push_back(v[7:0]);
  endfunction
  function automatic void put32(ref bq_t q, input logic [31:0] v);
    put16(q, v[31:16]); put16(q, v[15:0]);
  endfunction

  function automatic bq_t make_config(input logic [47:0] src_mac, input logic [31:0] src_ip,
                                      input logic [15:0] src_port, input logic [15:0] proto,
                                      input logic [31:0] board_id, input logic [7:0] flags,
                                      input logic [7:0] mask, input logic [15:0] delay,
                                      input cmdq_t cmds, input logic [15:0] ethertype = 16'h0800);
    bq_t q;
    q = {};
    put32(q, 32'hFFFF_FFFF); put16(q, 16'hFFFF);            // destination MAC
    put32(q, src_mac[47:16]); put16(q, src_mac[15:0]);
    put16(q, ethertype);
    put16(q, 16'h4500); put16(q, 16'd0); put16(q, 16'd1); put16(q, 16'h4000);
    put16(q, 16'h4006); put16(q, 16'h0000);
    put32(q, src_ip); put32(q, 32'hC0A8_0A02);
    put16(q, src_port); put16(q, 16'd7000); put32(q, 32'd1); put32(q, 32'd0);
    put16(q, 16'h5018); put16(q, 16'hFFFF); put16(q, 16'h0000); put16(q, 16'h0000);
    put16(q, proto); put32(q, board_id);
    q.push_back(flags); q.push_back(mask); put16(q, delay);
    q.push_back(8'(cmds.size()));
    foreach (cmds[i]) begin
      q.push_back(8'(cmds[i].len));
      for (int b = 0; b < (cmds[i].len + 7) / 8; b++) q.push_back(cmds[i].bits[63 - 8*b -: 8]);
    end
    // fix the IPv4 total length
    q[16] = 8'((q.size() - 14) >> 8); q[17] = 8'(q.size() - 14);
    return q;
  endfunction

  function automatic logic [31:0] crc32(input bq_t b);
    logic [31:0] c;
    c = 32'hFFFFFFFF;
    foreach (b[i]) begin
      c = c ^ {24'd0, b[i]};
      repeat (8) c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    end
    return ~c;
  endfunction

  // append the frame check sequence, least significant byte first
  function automatic bq_t with_fcs(input bq_t b);
    logic [31:0] c;
    bq_t q;
    q = b;
    c = crc32(b);
    for (int i = 0; i < 4; i++) q.push_back(c[8*i +: 8]);
    return q;
  endfunction
endpackage
