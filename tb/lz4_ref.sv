// lz4_ref: behavioural LZ4 block reference, instantiated by testbenches only
// and used through hierarchical function calls.
// lz4_ref_decode parses an LZ4 block (token, literal length, literals,
// little-endian offset, match length, with 255-valued extension bytes) into
// bytes. lz4_ref_encode builds a valid LZ4 block by brute-force search for the
// longest earlier match (window WIN bytes), a different method from the
// hash-probe hardware encoder, and follows the same end-of-block rules (no
// match starting in the last 12 bytes, last 5 bytes literal).
module lz4_ref;
  typedef byte unsigned bytes_t[$];

  function automatic bytes_t lz4_ref_decode(input bytes_t c, output bit err);
    bytes_t o;
    int p = 0;
    err = 0;
    while (p < c.size()) begin
      int ll, ml, off;
      byte unsigned tok;
      tok = c[p++];
      ll = tok >> 4;
      if (ll == 15) begin
        byte unsigned x;
        do begin
          if (p >= c.size()) begin err = 1; return o; end
          x = c[p++];
          ll += x;
        end while (x == 255);
      end
      for (int k = 0; k < ll; k++) begin
        if (p >= c.size()) begin err = 1; return o; end
        o.push_back(c[p++]);
      end
      if (p == c.size()) break;         // last sequence: literals only
      if (p + 2 > c.size()) begin err = 1; return o; end
      off = c[p] | (int'(c[p+1]) << 8);
      p += 2;
      ml = (tok & 15) + 4;
      if ((tok & 15) == 15) begin
        byte unsigned x;
        do begin
          if (p >= c.size()) begin err = 1; return o; end
          x = c[p++];
          ml += x;
        end while (x == 255);
      end
      if (off == 0 || off > o.size()) begin err = 1; return o; end
      for (int k = 0; k < ml; k++) o.push_back(o[o.size() - off]);
    end
    return o;
  endfunction

  function automatic void put_len(ref bytes_t c, input int n);
    while (n >= 255) begin
      c.push_back(8'd255);
      n -= 255;
    end
    c.push_back(8'(n));
  endfunction

  function automatic bytes_t lz4_ref_encode(input bytes_t d, input int WIN);
    bytes_t c;
    int n = d.size();
    int i = 0, anchor = 0;
    while (i + 12 <= n) begin
      int best = 0, boff = 0;
      for (int j = (i > WIN ? i - WIN : 0); j < i; j++) begin
        int l = 0;
        while (i + l < n - 5 && d[j + l] == d[i + l]) l++;
        if (l > best) begin best = l; boff = i - j; end
      end
      if (best >= 4) begin
        int ll = i - anchor, mc = best - 4;
        c.push_back(8'(((ll >= 15 ? 15 : ll) << 4) | (mc >= 15 ? 15 : mc)));
        if (ll >= 15) put_len(c, ll - 15);
        for (int k = anchor; k < i; k++) c.push_back(d[k]);
        c.push_back(8'(boff));
        c.push_back(8'(boff >> 8));
        if (mc >= 15) put_len(c, mc - 15);
        i += best;
        anchor = i;
      end else i++;
    end
    begin
      int ll = n - anchor;
      c.push_back(8'((ll >= 15 ? 15 : ll) << 4));
      if (ll >= 15) put_len(c, ll - 15);
      for (int k = anchor; k < n; k++) c.push_back(d[k]);
    end
    return c;
  endfunction

  // Test planes of different character: 0 all zero, 1 random, 2 short
  // repeated patterns with noise, 3 sparse (mostly zero bytes), 4 long runs.
  function automatic bytes_t make_plane(input int kind, input int n);
    bytes_t d;
    for (int k = 0; k < n; k++) begin
      case (kind)
        0: d.push_back(8'h00);
        1: d.push_back(8'($urandom));
        2: d.push_back(($urandom_range(0, 15) == 0) ? 8'($urandom) : 8'((k % 7) * 37));
        3: d.push_back(($urandom_range(0, 7) == 0) ? 8'($urandom) : 8'h00);
        default: d.push_back(8'((k / 300) * 17));
      endcase
    end
    return d;
  endfunction
endmodule
