// wm_ref_pkg: software reference of the Wu-Manber engine, for testbenches.
//
// wm_ref holds a signature set and computes, independently of the RTL:
//   - the pattern-buffer image (65-bit words, first byte in [63:56], zero
//     padded, flag 1 on all words but the last), signatures sorted by their
//     suffix pair (bytes ML-1 and ML) so each segment is one address range;
//   - the shift of each pair: min over signatures of ML - q, q the 1-based
//     end position of the pair inside the first ML bytes; ML-1 otherwise;
//   - the segments: first and last word address per suffix pair;
//   - the search result: the list of (text offset, signature address, length)
//     the engine must report, following the search rule: shift while the
//     shift is non-zero; on zero compare every signature of the segment,
//     then move by the length of the first one found, else by 1.
// It also generates random signatures and doped traces.
package wm_ref_pkg;

  typedef byte unsigned bq_t[$];

  typedef struct {
    int pos;
    int addr;
    int len;
  } match_t;

  class wm_ref;
    int          ml;
    bq_t         pats[$];
    int          addr[$];
    int          words[$];
    logic [64:0] pb[$];
    int          shift[int];
    int          seg_start[int], seg_end[int], seg_n[int];
    int          sfx[$];          // suffix pair of each signature
    int          seg_first[int];  // index of a segment's first signature

    function new(int ml_);
      ml = ml_;
    endfunction

    static function int pair_of(bq_t b, int i);
      return (int'(b[i]) << 8) | int'(b[i+1]);
    endfunction

    function int suffix(bq_t p);
      return pair_of(p, ml - 2);
    endfunction

    // Random signature: len bytes, last byte non-zero (zero tail is padding).
    function bq_t rand_pat(int len, int alpha);
      bq_t p;
      for (int i = 0; i < len; i++) p.push_back(8'($urandom_range(0, alpha - 1)));
      if (p[len-1] == 0) p[len-1] = 8'd1;
      return p;
    endfunction

    // n random signatures of minlen..maxlen bytes; about a third share the
    // suffix pair of an earlier one, so segments of several signatures occur.
    function void gen_set(int n, int minlen, int maxlen);
      for (int i = 0; i < n; i++) begin
        bq_t p;
        p = rand_pat($urandom_range(minlen, maxlen), 256);
        if (i > 0 && $urandom_range(0, 2) == 0) begin
          bq_t o;
          o = pats[$urandom_range(0, pats.size() - 1)];
          p[ml-2] = o[ml-2];
          p[ml-1] = o[ml-1];
        end
        pats.push_back(p);
      end
      build();
    endfunction

    // Sort by suffix pair and build all tables.
    function void build();
      int idx[$];
      int a;
      bq_t sorted[$];
      // stable grouping by suffix pair, in ascending pair order
      begin
        int by_key[int][$];
        foreach (pats[i]) by_key[suffix(pats[i])].push_back(i);
        foreach (by_key[k]) foreach (by_key[k][j]) idx.push_back(by_key[k][j]);
      end
      foreach (idx[i]) sorted.push_back(pats[idx[i]]);
      pats = sorted;
      pb.delete(); addr.delete(); words.delete(); shift.delete();
      seg_start.delete(); seg_end.delete(); seg_n.delete(); seg_first.delete();
      sfx.delete();
      foreach (pats[i]) sfx.push_back(suffix(pats[i]));
      a = 0;
      foreach (pats[i]) begin
        int nw;
        nw = (pats[i].size() + 7) / 8;
        addr.push_back(a);
        words.push_back(nw);
        for (int w = 0; w < nw; w++) begin
          logic [64:0] word;
          word = '0;
          word[64] = (w != nw - 1);
          for (int j = 0; j < 8; j++)
            if (8*w + j < pats[i].size()) word[63-8*j -: 8] = pats[i][8*w+j];
          pb.push_back(word);
        end
        for (int q = 2; q <= ml; q++) begin
          int pr, s;
          pr = pair_of(pats[i], q - 2);
          s = ml - q;
          if (!shift.exists(pr) || shift[pr] > s) shift[pr] = s;
        end
        if (!seg_start.exists(suffix(pats[i]))) begin
          seg_first[suffix(pats[i])] = i;
          seg_start[suffix(pats[i])] = a;
          seg_n[suffix(pats[i])] = 0;
        end
        seg_end[suffix(pats[i])] = a + nw - 1;
        seg_n[suffix(pats[i])]++;
        a += nw;
      end
    endfunction

    function int get_shift(int pr);
      return shift.exists(pr) ? shift[pr] : ml - 1;
    endfunction

    function int n_words();
      return pb.size();
    endfunction

    // Expected reports for one trace.
    function void search(bq_t t, ref match_t res[$]);
      int pos;
      pos = 0;
      while (pos + ml <= t.size()) begin
        int s;
        s = get_shift(pair_of(t, pos + ml - 2));
        if (s > 0) begin
          pos += s;
        end else begin
          int first;
          first = 0;
          for (int i = seg_first[pair_of(t, pos + ml - 2)];
               i < pats.size() && sfx[i] == pair_of(t, pos + ml - 2); i++) begin
            if (pos + pats[i].size() <= t.size()) begin
              bit eq;
              eq = 1;
              for (int k = 0; k < pats[i].size() && eq; k++) if (t[pos+k] != pats[i][k]) eq = 0;
              if (eq) begin
                match_t mt;
                mt.pos = pos; mt.addr = addr[i]; mt.len = pats[i].size();
                res.push_back(mt);
                if (first == 0) first = pats[i].size();
              end
            end
          end
          pos += (first > 0) ? first : 1;
        end
      end
    endfunction

    // Random trace of len bytes with signatures inserted: every `gap` bytes
    // on average a signature, a damaged copy of one (a byte inside its
    // window prefix changed) or filler.
    function bq_t dope(int len, int gap);
      bq_t t;
      while (t.size() < len) begin
        int r;
        r = $urandom_range(0, 2);
        for (int i = 0; i < $urandom_range(0, 2 * gap); i++) t.push_back(8'($urandom));
        if (r == 0 || r == 1) begin
          bq_t p;
          p = pats[$urandom_range(0, pats.size() - 1)];
          if (r == 1) p[$urandom_range(0, ml - 3)] ^= 8'h5A;
          foreach (p[k]) t.push_back(p[k]);
        end
      end
      while (t.size() > len) void'(t.pop_back());
      return t;
    endfunction
  endclass

endpackage
