// tb_codr_pkg: reference models shared by the CoDR testbenches.
//
// encode() is a software model of the offline RLE encoder: for the weight
// vector of one input channel (T_M kernels linearized, index k+1 for
// element k) it drops zeros, sorts the remaining weights by value (index as
// tie-break), groups equal values, and emits for each unique weight one
// entry {delta to the previous unique weight, repetition count}, followed
// by its indexes. A count that does not fit cnt_bits is continued in
// dummy entries with delta 0; a delta outside [-128, 127] is split by
// entries with count 0. Deltas and indexes use the short (flag 1) form when
// the value fits the low-precision field, else the long (flag 0) form.
// Streams are packed LSB first into 32-bit words. It also counts how often
// each special case occurred.
package tb_codr_pkg;

  typedef struct {
    int entries;
    int n_hp;         // high-precision deltas
    int n_lp;         // low-precision deltas
    int n_abs;        // absolute indexes
    int n_rel;        // delta indexes
    int n_dummy_ovf;  // count-overflow dummies (delta 0)
    int n_dummy_gap;  // count-0 split entries
  } enc_stats_t;

  function automatic void put_bits(ref bit q[$], input longint v, input int n);
    for (int i = 0; i < n; i++) q.push_back(bit'((v >> i) & 1));
  endfunction

  function automatic void pack(ref bit q[$], ref int unsigned words[$]);
    int unsigned wv;
    words.delete();
    for (int i = 0; i < q.size(); i += 32) begin
      wv = 0;
      for (int b = 0; b < 32; b++) if (i + b < q.size() && q[i+b]) wv |= (32'd1 << b);
      words.push_back(wv);
    end
  endfunction

  // w: weights (signed 8-bit values), length L; returns the packed streams.
  function automatic enc_stats_t encode(input int w[], input int cnt_bits, input int wlp_bits,
                                        input int ilp_bits, input int iabs_bits, input bit lp_signed,
                                        ref int unsigned cw[$], ref int unsigned dw[$],
                                        ref int unsigned iw[$]);
    enc_stats_t st;
    bit cq[$], dq[$], iq[$];
    int val[$], idx[$];
    int n, prev_w, prev_i, maxc, lo, hi;
    st = '{default: 0};
    for (int k = 0; k < w.size(); k++)
      if (w[k] != 0) begin val.push_back(w[k]); idx.push_back(k + 1); end
    n = val.size();
    // insertion sort by (value, index)
    for (int a = 1; a < n; a++) begin
      int v = val[a], x = idx[a], b = a - 1;
      while (b >= 0 && (val[b] > v || (val[b] == v && idx[b] > x))) begin
        val[b+1] = val[b]; idx[b+1] = idx[b]; b--;
      end
      val[b+1] = v; idx[b+1] = x;
    end
    maxc = (1 << cnt_bits) - 1;
    lo = lp_signed ? -(1 << (wlp_bits - 1)) : 0;
    hi = lp_signed ? (1 << (wlp_bits - 1)) - 1 : (1 << wlp_bits) - 1;
    prev_w = 0; prev_i = 0;
    for (int a = 0; a < n; ) begin
      int b = a, gap, rem;
      bit first;
      while (b < n && val[b] == val[a]) b++;
      gap = val[a] - prev_w;
      // split gaps that an 8-bit two's complement delta cannot hold
      while (gap > 127 || gap < -128) begin
        int part = (gap > 0) ? 127 : -128;
        put_bits(cq, 0, cnt_bits);
        put_bits(dq, (longint'(part) & 64'hff) << 1, 9);
        st.n_hp++; st.n_dummy_gap++; st.entries++;
        gap -= part;
      end
      rem = b - a; first = 1'b1;
      while (rem > 0) begin
        int c = (rem > maxc) ? maxc : rem;
        int d = first ? gap : 0;
        if (!first) st.n_dummy_ovf++;
        put_bits(cq, longint'(c), cnt_bits);
        if (d >= lo && d <= hi) begin
          put_bits(dq, ((longint'(d) & ((1 << wlp_bits) - 1)) << 1) | 1, wlp_bits + 1);
          st.n_lp++;
        end else begin
          put_bits(dq, (longint'(d) & 64'hff) << 1, 9);
          st.n_hp++;
        end
        st.entries++;
        for (int j = 0; j < c; j++) begin
          int ix = idx[a + (b - a - rem) + j];
          int di = ix - prev_i;
          if (di >= 0 && di < (1 << ilp_bits)) begin
            put_bits(iq, (longint'(di) << 1) | 1, ilp_bits + 1);
            st.n_rel++;
          end else begin
            put_bits(iq, longint'(ix) << 1, iabs_bits + 1);
            st.n_abs++;
          end
          prev_i = ix;
        end
        rem -= c; first = 1'b0;
      end
      prev_w = val[a];
      a = b;
    end
    pack(cq, cw); pack(dq, dw); pack(iq, iw);
    return st;
  endfunction

  // Signed 8-bit saturation after an arithmetic shift, as the APE does.
  function automatic int requant(input longint x, input int sh, input bit relu);
    longint y = (relu && x < 0) ? 0 : x;
    y = y >>> sh;
    if (y > 127) y = 127;
    if (y < -128) y = -128;
    return int'(y);
  endfunction

  function automatic int rnd_weight(input int density_pct, input int uniq_shift);
    int v;
    if (($urandom % 100) >= density_pct) return 0;
    v = int'($urandom % 256) - 128;
    v = (v >>> uniq_shift) <<< uniq_shift;  // limit the number of unique weights
    return v;
  endfunction
endpackage
