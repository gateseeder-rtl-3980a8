// gs_tb_pkg: software reference model shared by the seeding testbenches.
//
// Written independently of the RTL, as plain sequential code: the k-mer hash,
// the minimizer scan of a read, the construction of the map/key index from a
// reference sequence (with the max_occ filter), the expected anchor words and
// the packing of a read batch into memory words. Base codes are 0..3 for
// A, C, G, T, 4 for N and 5 for the read separator E.
package gs_tb_pkg;

  typedef struct {
    longint unsigned hash;
    int unsigned     loc;
    bit              str;
  } seed_s;

  typedef struct {
    int unsigned loc;
    bit          str;
  } hit_s;

  // minimap2-style invertible hash of a 2k-bit value
  function automatic longint unsigned ref_hash(longint unsigned x, int k);
    longint unsigned m = (k == 32) ? '1 : ((64'd1 << (2*k)) - 1);
    longint unsigned y;
    y = (~x + (x << 21)) & m;
    y = y ^ (y >> 24);
    y = ((y + (y << 3)) + (y << 8)) & m;
    y = y ^ (y >> 14);
    y = ((y + (y << 2)) + (y << 4)) & m;
    y = y ^ (y >> 28);
    y = (y + (y << 31)) & m;
    return y;
  endfunction

  // Minimizers of one read (codes 0..4, no separator): for every window of w
  // consecutive k-mers, the valid k-mer with the smallest hash (leftmost on a
  // tie); a k-mer is emitted once even if it wins several windows.
  function automatic void minimizers(input byte unsigned s[$], input int k,
                                     input int w, ref seed_s out[$]);
    int n = s.size();
    longint unsigned h[$];
    bit st[$];
    bit v[$];
    int last = -1;
    out.delete();
    for (int i = 0; i + k <= n; i++) begin
      longint unsigned f = 0, r = 0;
      bit ok = 1;
      for (int j = 0; j < k; j++) begin
        if (s[i+j] > 3) ok = 0;
        f = (f << 2) | longint'(s[i+j] & 3);
        r = r | (longint'(3 - (s[i+j] & 3)) << (2*j));
      end
      st.push_back(r < f);
      h.push_back(ref_hash((r < f) ? r : f, k));
      v.push_back(ok);
    end
    for (int j = 0; j + w <= h.size(); j++) begin
      int best = -1;
      for (int t = j; t < j + w; t++)
        if (v[t] && (best < 0 || h[t] < h[best])) best = t;
      if (best >= 0 && best != last) begin
        seed_s sd;
        sd.hash = h[best];
        sd.loc  = best;
        sd.str  = st[best];
        out.push_back(sd);
        last = best;
      end
    end
  endfunction

  // Index of a reference: hits per hash (in reference order), with every hash
  // occurring more than max_occ times removed.
  class gs_index;
    hit_s hits [longint unsigned][$];
    longint unsigned sorted [$];     // present hashes, ascending
    int unsigned first [longint unsigned];  // key-array index of first hit
    int unsigned total;                     // key-array length

    function void build(byte unsigned refseq[$], int k, int w, int max_occ);
      seed_s sd[$];
      int unsigned n = 0;
      minimizers(refseq, k, w, sd);
      foreach (sd[i]) begin
        hit_s ht;
        ht.loc = sd[i].loc;
        ht.str = sd[i].str;
        hits[sd[i].hash].push_back(ht);
      end
      foreach (hits[hh]) if (hits[hh].size() > max_occ) sorted.push_back(hh);
      foreach (sorted[i]) hits.delete(sorted[i]);
      sorted.delete();
      foreach (hits[hh]) sorted.push_back(hh);
      sorted.sort();
      foreach (sorted[i]) begin
        first[sorted[i]] = n;
        n += hits[sorted[i]].size();
      end
      total = n;
    endfunction

    // map-array value at address a: number of key entries of hashes below a
    // (binary search for the first present hash >= a)
    function int unsigned map_at(longint unsigned a);
      int lo, hi, mid;
      lo = 0;
      hi = sorted.size();
      while (lo < hi) begin
        mid = (lo + hi) / 2;
        if (sorted[mid] < a) lo = mid + 1;
        else hi = mid;
      end
      return (lo == sorted.size()) ? total : first[sorted[lo]];
    endfunction

    function int unsigned nkeys();
      int unsigned c = 0;
      foreach (sorted[i]) c += hits[sorted[i]].size();
      return c;
    endfunction

    function int unsigned occ(longint unsigned hh);
      return hits.exists(hh) ? hits[hh].size() : 0;
    endfunction
  endclass

  // Expected anchor word: {eor, str, rd_loc[29:0], delta[31:0]}
  function automatic longint unsigned anchor_word(int unsigned rd_loc, bit str,
                                                  int unsigned ref_loc);
    longint unsigned a;
    a = {1'b0, str, rd_loc[29:0], 32'(ref_loc - rd_loc)};
    return a;
  endfunction

  localparam longint unsigned EOR_WORD = 64'h8000_0000_0000_0000;

  // Reverse complement of a read (N stays N).
  function automatic void revcomp(input byte unsigned s[$], ref byte unsigned o[$]);
    o.delete();
    for (int i = s.size() - 1; i >= 0; i--) o.push_back(s[i] > 3 ? s[i] : 3 - s[i]);
  endfunction

  // A test read drawn from the reference. kind 0: exact forward copy,
  // 1: forward copy with ~2% substitutions, 2: reverse complement,
  // 3: random sequence, 4: forward copy with a run of N, 5: too short for a
  // window (under w+k-1 bases).
  function automatic void sample_read(input byte unsigned refseq[$], input int kind,
                                      ref byte unsigned rd[$]);
    int len = (kind == 5) ? 5 + $urandom % 15 : 80 + $urandom % 420;
    int st = $urandom % (refseq.size() - len);
    byte unsigned tmp[$];
    rd.delete();
    for (int i = 0; i < len; i++) rd.push_back(refseq[st + i]);
    case (kind)
      1: foreach (rd[i]) if ($urandom % 100 < 2) rd[i] = (rd[i] + 1 + $urandom % 3) % 4;
      2: begin revcomp(rd, tmp); rd = tmp; end
      3: foreach (rd[i]) rd[i] = $urandom % 4;
      4: for (int i = len / 3; i < len / 3 + 20; i++) rd[i] = 4;
      default: ;
    endcase
  endfunction

  // Expected anchor-buffer words of one read: for every minimizer of the read
  // in read order, one anchor per index hit in key-array order, then the
  // end-of-read word. Also returns how many of its seeds found no hit.
  function automatic void read_anchors(input gs_index idx, input byte unsigned rd[$],
                                       input int k, input int w,
                                       ref longint unsigned out[$], ref int nmiss,
                                       ref int nmulti, ref int nrev);
    seed_s sd[$];
    minimizers(rd, k, w, sd);
    foreach (sd[i]) begin
      if (!idx.hits.exists(sd[i].hash)) nmiss++;
      else begin
        if (idx.hits[sd[i].hash].size() > 1) nmulti++;
        foreach (idx.hits[sd[i].hash][j]) begin
          bit s = sd[i].str ^ idx.hits[sd[i].hash][j].str;
          if (s) nrev++;
          out.push_back(anchor_word(sd[i].loc, s, idx.hits[sd[i].hash][j].loc));
        end
      end
    end
    out.push_back(EOR_WORD);
  endfunction

  // Random reference with planted repeats: a 300-base segment copied twice
  // more (kept, 3 hits per minimizer when max_occ >= 3) and a 200-base
  // segment copied five more times (removed when max_occ < 6).
  function automatic void make_reference(input int len, ref byte unsigned refseq[$]);
    byte unsigned a[$], b[$];
    refseq.delete();
    for (int i = 0; i < 300; i++) a.push_back($urandom % 4);
    for (int i = 0; i < 200; i++) b.push_back($urandom % 4);
    for (int i = 0; i < len; i++) begin
      if (i % (len / 8) == 100) begin
        if ((i / (len / 8)) < 3) foreach (a[j]) refseq.push_back(a[j]);
        else if ((i / (len / 8)) < 9) foreach (b[j]) refseq.push_back(b[j]);
      end
      refseq.push_back($urandom % 4);
    end
  endfunction

endpackage
