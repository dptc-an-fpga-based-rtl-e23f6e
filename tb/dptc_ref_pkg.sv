// dptc_ref_pkg -- reference model of the DPTC trace format for the
// testbenches: a bit-serial encoder and an independent decoder, written
// with plain integer arithmetic and bit queues, sharing nothing with the RTL.
//
// encode(): first sample with n bits, then groups of four differences (the
// last group may be shorter), each with a 2-bit header (01/10/11 = width
// -1/0/+1) or 00 followed by (dm-2) in k = ceil(log2(n-3)) bits, dm being
// the width change modulo n, and values stored with a bias of 2^(m-1).
// Bits are packed LSB first into 32-bit words; the last word is zero
// padded. decode() reverses this given the word count, sample count and n.
package dptc_ref_pkg;

  typedef int unsigned uq_t[$];

  // statistics of one encoded trace
  typedef struct {
    int unsigned nbits;       // bits used before padding
    int unsigned n_short_dec;
    int unsigned n_short_same;
    int unsigned n_short_inc;
    int unsigned n_long;
    int unsigned n_partial;   // last group shorter than four
    int unsigned n_invert;    // values stored negated by the sign rule
    int unsigned n_pred;      // values stored as second difference
    int unsigned n_split;     // values that straddle a word boundary
  } stats_t;

  function automatic int clog2i(input int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  function automatic int to_signed(input int unsigned v, input int n);
    int x = int'(v & ((1 << n) - 1));
    if (x >= (1 << (n - 1))) x -= (1 << n);
    return x;
  endfunction

  function automatic int min_bits(input int v);
    int m = 1;
    while (!(v >= -(1 << (m - 1)) && v <= (1 << (m - 1)) - 1)) m++;
    return m;
  endfunction

  function automatic void push_bits(ref bit q[$], input int unsigned v, input int w);
    for (int i = 0; i < w; i++) q.push_back(bit'((v >> i) & 1));
  endfunction

  // Values that stage 1 produces for a trace (first sample, then stored
  // differences), modulo 2^n, as signed ints for the differences.
  function automatic void stage1(input int n, input bit pred, input uq_t s,
                                 output int vals[$], ref stats_t st);
    bit inv = 0;
    int h[$];
    vals = {};
    if (s.size() == 0) return;
    vals.push_back(int'(s[0]));
    for (int i = 1; i < s.size(); i++) begin
      int d = to_signed(s[i] - s[i-1], n);
      int v = d;
      if (pred && h.size() >= 3) begin
        int a = h[h.size()-1], b = h[h.size()-2], c = h[h.size()-3];
        if (a != 0 && b != 0 && c != 0 && ((a < 0) == (b < 0)) && ((b < 0) == (c < 0))) begin
          v = to_signed(d - a, n);
          st.n_pred++;
        end
      end
      if (inv) begin
        v = to_signed(-v, n);
        if (v != 0) st.n_invert++;
      end
      if (v < 0) inv = 1;
      else if (v > 0) inv = 0;
      h.push_back(d);
      vals.push_back(v);
    end
  endfunction

  function automatic void encode(input int n, input bit pred, input uq_t s,
                                 output uq_t words, output stats_t st);
    bit q[$];
    int vals[$];
    int k = clog2i(n - 3);
    int mprev = n;
    st = '{default: 0};
    words = {};
    stage1(n, pred, s, vals, st);
    if (vals.size() > 0) push_bits(q, vals[0], n);
    for (int g = 1; g < vals.size(); g += 4) begin
      int cnt = (vals.size() - g < 4) ? vals.size() - g : 4;
      int m = 1, dm;
      for (int j = 0; j < cnt; j++)
        if (min_bits(vals[g+j]) > m) m = min_bits(vals[g+j]);
      dm = ((m - mprev) % n + n) % n;
      if (dm == 0)          begin push_bits(q, 2, 2); st.n_short_same++; end
      else if (dm == 1)     begin push_bits(q, 3, 2); st.n_short_inc++;  end
      else if (dm == n - 1) begin push_bits(q, 1, 2); st.n_short_dec++;  end
      else begin
        push_bits(q, 0, 2);
        push_bits(q, dm - 2, k);
        st.n_long++;
      end
      if (cnt < 4) st.n_partial++;
      for (int j = 0; j < cnt; j++) begin
        int start = q.size();
        push_bits(q, int'(vals[g+j] + (1 << (m - 1))), m);
        if ((start / 32) != ((q.size() - 1) / 32)) st.n_split++;
      end
      mprev = m;
    end
    st.nbits = q.size();
    while (q.size() % 32 != 0) q.push_back(0);
    for (int w = 0; w < q.size() / 32; w++) begin
      int unsigned x = 0;
      for (int i = 0; i < 32; i++) x |= int'(q[32*w+i]) << i;
      words.push_back(x);
    end
  endfunction

  // Decoder. Returns 0 on success, 1 on malformed data.
  function automatic int decode(input uq_t words, input int ndata, input int n,
                                input bit pred, output uq_t s);
    int pos = 0, total = words.size() * 32;
    int k = clog2i(n - 3);
    int m = n;
    bit inv = 0;
    int h[$];
    s = {};
    if (ndata == 0) return (words.size() == 0) ? 0 : 1;
    begin : body
      int unsigned x = 0;
      int unsigned cur;
      int left;
      for (int i = 0; i < n; i++) x |= ((words[(pos+i)/32] >> ((pos+i)%32)) & 1) << i;
      pos += n;
      cur = x;
      s.push_back(cur);
      left = ndata - 1;
      while (left > 0) begin
        int code = 0, cnt;
        if (pos + 2 > total) return 1;
        for (int i = 0; i < 2; i++) code |= ((words[(pos+i)/32] >> ((pos+i)%32)) & 1) << i;
        pos += 2;
        if (code == 0) begin
          int f = 0;
          for (int i = 0; i < k; i++) f |= ((words[(pos+i)/32] >> ((pos+i)%32)) & 1) << i;
          pos += k;
          m = (m - 1 + f + 2) % n + 1;
        end else begin
          m = (m - 1 + (code - 2) + n) % n + 1;
        end
        cnt = left < 4 ? left : 4;
        for (int j = 0; j < cnt; j++) begin
          int unsigned raw = 0;
          int v, d;
          if (pos + m > total) return 1;
          for (int i = 0; i < m; i++) raw |= ((words[(pos+i)/32] >> ((pos+i)%32)) & 1) << i;
          pos += m;
          v = int'(raw) - (1 << (m - 1));
          // undo sign rule, then predictor
          d = inv ? -v : v;
          if (v < 0) inv = 1; else if (v > 0) inv = 0;
          if (pred && h.size() >= 3) begin
            int a = h[h.size()-1], b = h[h.size()-2], c = h[h.size()-3];
            if (a != 0 && b != 0 && c != 0 && ((a < 0) == (b < 0)) && ((b < 0) == (c < 0)))
              d = to_signed(d + a, n);
          end
          d = to_signed(d, n);
          h.push_back(d);
          cur = (cur + d) & ((1 << n) - 1);
          s.push_back(cur);
        end
        left -= cnt;
      end
      // leftover bits must be zero and no whole word unused
      if (total - pos >= 32) return 1;
      for (int p = pos; p < total; p++) if (((words[p/32] >> (p%32)) & 1) != 0) return 1;
    end
    return 0;
  endfunction

endpackage
