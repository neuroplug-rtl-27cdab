// tb_huff_pkg: testbench helpers for the Huffman coder: build a canonical code
// from a table of code lengths, and produce the reference byte stream of a tile
// (codes MSB first, last byte zero padded).
package tb_huff_pkg;

  typedef int unsigned lens_t [256];
  typedef int unsigned codes_t [256];
  typedef byte unsigned bytes_q_t [$];

  // Sparse-data code: 0 -> 1 bit, 1..15 -> 5 bits, 16..255 -> 13 bits.
  function automatic lens_t sparse_lens();
    lens_t l;
    for (int s = 0; s < 256; s++) l[s] = (s == 0) ? 1 : (s < 16) ? 5 : 13;
    return l;
  endfunction

  function automatic lens_t flat_lens();
    lens_t l;
    for (int s = 0; s < 256; s++) l[s] = 8;
    return l;
  endfunction

  // canonical code: order by (length, symbol), consecutive codes per length
  function automatic codes_t canon(input lens_t l);
    codes_t c;
    int unsigned code = 0;
    for (int len = 1; len <= 16; len++) begin
      for (int s = 0; s < 256; s++)
        if (l[s] == len) begin c[s] = code; code++; end
      code = code << 1;
    end
    return c;
  endfunction

  function automatic int unsigned count_len(input lens_t l, input int len);
    int unsigned n = 0;
    for (int s = 0; s < 256; s++) if (l[s] == len) n++;
    return n;
  endfunction

  // sorted symbol list (decoder order)
  function automatic bytes_q_t sorted_syms(input lens_t l);
    bytes_q_t q;
    for (int len = 1; len <= 16; len++)
      for (int s = 0; s < 256; s++) if (l[s] == len) q.push_back(byte'(s));
    return q;
  endfunction

  function automatic bytes_q_t encode(input lens_t l, input codes_t c, input bytes_q_t tile);
    bytes_q_t o;
    int unsigned acc = 0, n = 0;
    foreach (tile[i]) begin
      for (int b = int'(l[tile[i]]) - 1; b >= 0; b--) begin
        acc = (acc << 1) | ((c[tile[i]] >> b) & 1);
        n++;
        if (n == 8) begin o.push_back(byte'(acc)); acc = 0; n = 0; end
      end
    end
    if (n != 0) o.push_back(byte'(acc << (8 - n)));
    return o;
  endfunction

  // a random tile with mostly zeros and a few small values (pruned data)
  function automatic bytes_q_t random_tile(input int unsigned nbytes, input int unsigned zero_pct);
    bytes_q_t t;
    for (int unsigned i = 0; i < nbytes; i++) begin
      int unsigned r = $urandom_range(99);
      if (r < zero_pct) t.push_back(8'd0);
      else if (r < zero_pct + (100 - zero_pct) / 2) t.push_back(byte'($urandom_range(15, 1)));
      else t.push_back(byte'($urandom_range(255)));
    end
    return t;
  endfunction

endpackage
