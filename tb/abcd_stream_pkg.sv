// abcd_stream_pkg: test helpers for the front-end data format.
//
// make_stream builds the bit stream one ABCD data line sends after a trigger:
// preamble 11101, a 12-bit header (4-bit event count, 8-bit bunch count), one
// 19-bit record per hit (01, 7-bit chip address with MSB set, 7-bit channel
// with MSB set, 3-bit hit pattern 010), and the trailer 1 followed by fifteen
// zeros.  No run of fifteen zeros occurs before the trailer.  The length is
// 33 + 19 * hits bits (53 bits per line at zero hits in the real chip; this
// model's header is simplified).
// expected_block gives what a 32-word (512-bit) event block must hold after
// the stream was captured: 16-bit words MSB first, last word zero padded, word
// i written at i mod 32 so that long streams wrap round.
package abcd_stream_pkg;
  typedef bit bitq_t[$];
  typedef logic [15:0] block_t [32];

  function automatic bitq_t make_stream(input int hits, input int l1id, input int bcid);
    bitq_t q;
    logic [18:0] rec;
    q = {};
    for (int i = 4; i >= 0; i--) q.push_back(1'(5'b11101 >> i));
    for (int i = 3; i >= 0; i--) q.push_back(1'(l1id >> i));
    for (int i = 7; i >= 0; i--) q.push_back(1'(bcid >> i));
    for (int h = 0; h < hits; h++) begin
      rec = {2'b01, 1'b1, 6'($urandom), 1'b1, 6'($urandom), 3'b010};
      for (int i = 18; i >= 0; i--) q.push_back(rec[i]);
    end
    q.push_back(1'b1);
    for (int i = 0; i < 15; i++) q.push_back(1'b0);
    return q;
  endfunction

  // number of 16-bit words the stream fills
  function automatic int n_words(input bitq_t q);
    return (q.size() + 15) / 16;
  endfunction

  function automatic block_t expected_block(input bitq_t q, input block_t old);
    block_t b;
    logic [15:0] w;
    int nw;
    b = old;
    nw = n_words(q);
    for (int k = 0; k < nw; k++) begin
      w = '0;
      for (int j = 0; j < 16; j++) w[15-j] = (16*k + j < q.size()) ? q[16*k + j] : 1'b0;
      b[k % 32] = w;
    end
    return b;
  endfunction
endpackage
