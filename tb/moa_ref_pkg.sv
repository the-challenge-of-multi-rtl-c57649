// moa_ref_pkg: reference models used by the testbenches, written apart from
// the RTL: the LOA sum of two bit patterns and the value a pipelined binary
// tree of LOA adders returns for a list of signed operands (pairs (0,1),
// (2,3), ... per level, an odd last value carried up, one bit of growth per
// level).
package moa_ref_pkg;

  function automatic longint mask(int w);
    return (w >= 63) ? -1 : ((longint'(1) << w) - 1);
  endfunction

  // Two's-complement value of the low w bits of v.
  function automatic longint sext(longint v, int w);
    longint m = mask(w);
    v = v & m;
    if (((v >> (w - 1)) & 1) != 0) v = v - (longint'(1) << w);
    return v;
  endfunction

  // b-bit LOA with l ORed low bits, on b-bit patterns; returns a b-bit pattern.
  function automatic longint loa_ref(longint a, longint b, int bw, int l);
    longint lo, hi, cin;
    a = a & mask(bw);
    b = b & mask(bw);
    if (l == 0) return (a + b) & mask(bw);
    lo  = (a | b) & mask(l);
    cin = (a >> (l - 1)) & (b >> (l - 1)) & 1;
    hi  = ((a >> l) + (b >> l) + cin) & mask(bw - l);
    return (hi << l) | lo;
  endfunction

  // Signed result of the LOA tree over signed operands of width in_w.
  function automatic longint tree_ref(longint ops[$], int in_w, int l);
    longint cur[$], nxt[$];
    int w = in_w;
    int ll;
    cur = ops;
    do begin
      w++;
      ll = (l > w) ? w : l;
      nxt = {};
      for (int j = 0; j < cur.size(); j += 2) begin
        if (j + 1 < cur.size())
          nxt.push_back(sext(loa_ref(cur[j], cur[j+1], w, ll), w));
        else
          nxt.push_back(cur[j]);
      end
      cur = nxt;
    end while (cur.size() > 1);
    return cur[0];
  endfunction

endpackage
