// topk_ref_pkg: reference models used by the testbenches.
//
// mm3      MurmurHash3 x86_32 written byte by byte from its definition
//          (blocks of four little-endian bytes, tail, length, final mix).
// tower_model  TowerSketch with conservative update, straight from the
//          insertion/estimation algorithm, counters in associative arrays.
// pqa_model    priority queue array; each queue is a list in ascending count
//          order. Insertion removes the lowest element, an update removes the
//          flow's element, and either puts {tag, est} back just above every
//          element whose count is <= est.
package topk_ref_pkg;

  function automatic bit [31:0] rotl(bit [31:0] x, int r);
    return (x << r) | (x >> (32 - r));
  endfunction

  function automatic bit [31:0] mm3(bit [103:0] key, bit [31:0] seed);
    bit [7:0]  b [13];
    bit [31:0] h, k;
    for (int i = 0; i < 13; i++) b[i] = key[8*i +: 8];
    h = seed;
    for (int blk = 0; blk < 3; blk++) begin
      k = {b[4*blk+3], b[4*blk+2], b[4*blk+1], b[4*blk]};
      k = k * 32'hcc9e2d51;
      k = rotl(k, 15);
      k = k * 32'h1b873593;
      h = h ^ k;
      h = rotl(h, 13);
      h = h * 5 + 32'he6546b64;
    end
    k = {24'd0, b[12]};
    k = k * 32'hcc9e2d51;
    k = rotl(k, 15);
    k = k * 32'h1b873593;
    h = h ^ k;
    h = h ^ 32'd13;
    h = h ^ (h >> 16);
    h = h * 32'h85ebca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  localparam bit [31:0] SEEDS [6] = '{
    32'h9747_b28c, 32'h1b87_3593, 32'hcc9e_2d51,
    32'h85eb_ca6b, 32'hc2b2_ae35, 32'he654_6b64
  };
  localparam int DELTAS [6] = '{8, 8, 8, 16, 16, 32};

  class tower_model;
    bit [31:0] tower [6][int unsigned];
    int unsigned n_ovf8, n_ovf16;

    function void clear();
      for (int i = 0; i < 6; i++) tower[i].delete();
    endfunction

    // returns the estimate clipped to 20 bits
    function bit [19:0] insert(bit [103:0] f);
      bit [31:0] bucket [6];
      int unsigned idx [6];
      bit [31:0] minval, minval2, full;
      minval = 32'hffff_ffff;
      for (int i = 0; i < 6; i++) begin
        bit [31:0] hsh;
        hsh = mm3(f, SEEDS[i]);
        idx[i] = hsh & ((32'd1 << (21 - $clog2(DELTAS[i]))) - 1);
        bucket[i] = tower[i].exists(idx[i]) ? tower[i][idx[i]] : 0;
        full = (DELTAS[i] == 32) ? 32'hffff_ffff : (32'd1 << DELTAS[i]) - 1;
        if (bucket[i] < minval && bucket[i] != full) minval = bucket[i];
      end
      minval2 = 32'hffff_ffff;
      for (int i = 0; i < 6; i++) begin
        full = (DELTAS[i] == 32) ? 32'hffff_ffff : (32'd1 << DELTAS[i]) - 1;
        if (bucket[i] == minval && bucket[i] != full) begin
          bucket[i] = bucket[i] + 1;
          tower[i][idx[i]] = bucket[i];
          if (bucket[i] == full && DELTAS[i] == 8)  n_ovf8++;
          if (bucket[i] == full && DELTAS[i] == 16) n_ovf16++;
        end
        if (bucket[i] < minval2 && bucket[i] != full) minval2 = bucket[i];
      end
      return (minval2 >= 32'hfffff) ? 20'hfffff : minval2[19:0];
    endfunction
  endclass

  typedef struct {
    bit [31:0] tag;
    bit [19:0] cnt;
  } ref_elem_t;

  class pqa_model;
    int S, R, idx_w;
    ref_elem_t q [int][$];   // ascending; only valid elements
    int n_ins, n_upd, n_rej;

    function new(int s, int r);
      S = s; R = r; idx_w = $clog2(r);
    endfunction

    function void clear();
      q.delete();
    endfunction

    function void put(int idx, ref_elem_t e);
      int p;
      p = 0;
      while (p < q[idx].size() && q[idx][p].cnt <= e.cnt) p++;
      q[idx].insert(p, e);
    endfunction

    function void insert(bit [31:0] id, bit [19:0] est);
      int idx, pos;
      bit [31:0] tag;
      ref_elem_t e;
      idx = id & (R - 1);
      tag = id >> idx_w;
      if (!q.exists(idx)) q[idx] = {};
      pos = -1;
      begin
        ref_elem_t row [$];
        row = q[idx];
        foreach (row[i]) if (row[i].tag == tag) pos = i;
      end
      e.tag = tag; e.cnt = est;
      if (pos >= 0) begin
        if (q[idx][pos].cnt < est) begin
          q[idx].delete(pos);
          put(idx, e);
          n_upd++;
        end else n_rej++;
      end else if (q[idx].size() < S) begin
        put(idx, e);
        n_ins++;
      end else if (est > q[idx][0].cnt) begin
        q[idx].delete(0);
        put(idx, e);
        n_ins++;
      end else n_rej++;
    endfunction

    // expected readout of queue idx: element j of S (0 = lowest), count 0 if empty
    function void expect_row(int idx, output bit [19:0] cnt [], output bit [31:0] id []);
      int n, base;
      cnt = new[S];
      id  = new[S];
      n = q.exists(idx) ? q[idx].size() : 0;
      base = S - n;
      for (int j = 0; j < S; j++) begin
        if (j < base) begin
          cnt[j] = 0;
          id[j]  = idx;
        end else begin
          cnt[j] = q[idx][j - base].cnt;
          id[j]  = (q[idx][j - base].tag << idx_w) | idx;
        end
      end
    endfunction
  endclass

endpackage
