// eth_sink: test-side receiver of the readout board's data packets.
//
// Reads txd/tx_en as the Ethernet transceiver would at 100 Mb/s, checks
// preamble, start byte and frame check sequence of every frame, joins IPv4
// fragments in order of arrival into datagrams, and splits each datagram's TCP
// payload into events (32-bit ID, then 8 lines x 32 words).  Results are left
// in queues for the test to compare: ev_id, ev_data, pkt_seq (TCP sequence
// number of each datagram) and the error counters.
module eth_sink (
  input  logic       clk,
  input  logic [3:0] txd,
  input  logic       tx_en
);
  import eth_tb_pkg::*;

  int frames = 0, fcs_errors = 0, format_errors = 0, datagrams = 0, fragmented = 0;
  int unsigned ev_id [$];
  evdata_t     ev_data [$];
  int unsigned pkt_seq [$];
  int          pkt_events [$];

  bq_t dgram;

  initial begin
    forever begin
      @(posedge clk); #1;
      if (tx_en === 1'b1) begin
        bq_t fr, body;
        logic [3:0] lo;
        bit h;
        fr = {}; body = {}; h = 0;
        while (tx_en === 1'b1) begin
          if (!h) lo = txd; else fr.push_back({txd, lo});
          h = ~h;
          @(posedge clk); #1;
        end
        frames++;
        for (int i = 8; i < fr.size() - 4; i++) body.push_back(fr[i]);
        if (fr.size() < 12 || fr[7] != 8'hD5 ||
            {fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]} != crc32(body))
          fcs_errors++;
        else
          take_frame(body);
      end
    end
  end

  task automatic take_frame(input bq_t f);
    int tot, mf;
    if ({f[12], f[13]} != 16'h0800 || f[23] != 8'd6) begin format_errors++; return; end
    tot = {f[16], f[17]};
    mf  = f[20][5];
    if ({f[20][4:0], f[21]} != 13'(dgram.size() / 8)) format_errors++;
    for (int i = 34; i < 14 + tot; i++) dgram.push_back(f[i]);
    if (mf) begin fragmented++; return; end
    datagrams++;
    pkt_seq.push_back({dgram[4], dgram[5], dgram[6], dgram[7]});
    if ((dgram.size() - 20) % 516 != 0) format_errors++;
    pkt_events.push_back((dgram.size() - 20) / 516);
    for (int e = 0; e < (dgram.size() - 20) / 516; e++) begin
      int b;
      evdata_t d;
      b = 20 + e * 516;
      ev_id.push_back({dgram[b], dgram[b+1], dgram[b+2], dgram[b+3]});
      for (int l = 0; l < 8; l++)
        for (int w = 0; w < 32; w++)
          d[l][w] = {dgram[b + 4 + 64*l + 2*w], dgram[b + 5 + 64*l + 2*w]};
      ev_data.push_back(d);
    end
    dgram = {};
  endtask
endmodule
