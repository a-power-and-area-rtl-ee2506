// lepton_ref_pkg -- behavioural reference models used by the testbenches.
//
// Written independently of the RTL, in plain procedural style:
//   bool_enc   : VP8-style boolean range coder writing into a byte queue, with
//                carries propagated directly into the bytes already written
//   bin_ref    : an adaptive bin {c0, c1} and its probability
//   model_ref  : all 76 models, as associative arrays, with the optional
//                set-associative capacity limit of the optimized models
//   elements_of / bins_of : the coding order and binarization of one block
package lepton_ref_pkg;

  class bool_enc;
    byte unsigned buffer[$];
    int unsigned  low;
    int unsigned  range_q;
    int           count;
    function new();
      low = 0; range_q = 255; count = -24;
    endfunction
    function void put(bit b, int prob);
      int unsigned split;
      int shift, offset, x;
      split = 1 + (((range_q - 1) * prob) >> 8);
      if (b) begin low += split; range_q -= split; end
      else range_q = split;
      shift = 0;
      while (range_q < 128) begin range_q <<= 1; shift++; end
      count += shift;
      if (count >= 0) begin
        offset = shift - count;
        if (((low << (offset - 1)) & 32'h8000_0000) != 0) begin
          x = buffer.size() - 1;
          while (x >= 0 && buffer[x] == 8'hff) begin buffer[x] = 0; x--; end
          buffer[x] = buffer[x] + 1;
        end
        buffer.push_back(byte'((low >> (24 - offset)) & 8'hff));
        low <<= offset;
        shift = count;
        low &= 32'h00ff_ffff;
        count -= 8;
      end
      low <<= shift;
    endfunction
    function void finish();
      for (int i = 0; i < 32; i++) put(0, 128);
    endfunction
  endclass

  function automatic int bin_prob(int c0, int c1);
    int q;
    q = (c0 * 256) / (c0 + c1);
    if (q < 1) q = 1;
    if (q > 255) q = 255;
    return q;
  endfunction

  // c = {c0, c1}; returns the updated pair
  function automatic void bin_update(inout int c0, inout int c1, input bit b);
    if (b) c1++; else c0++;
    if (c0 >= 255 || c1 >= 255) begin c0 = (c0 + 1) / 2; c1 = (c1 + 1) / 2; end
  endfunction

  // One probability model: bins by index, optional set-associative limit
  class model_ref;
    int c0 [int];
    int c1 [int];
    int opt;          // 1: set-associative
    int ways, m;
    int bnd [$];      // interval boundaries 0, B1..B(m-1), max_index
    int used [int][$];
    int overflows;
    function new(int is_opt = 0, int max_index = 1, int depth = 1, int n = 1);
      int step;
      opt = is_opt; ways = n; overflows = 0;
      m = depth / n;
      step = (max_index + m - 1) / m;
      for (int i = 0; i < m; i++) bnd.push_back(i * step);
      bnd.push_back(max_index);
    endfunction
    // returns the probability, -1 on overflow; updates the bin
    function int access(int idx, bit b);
      int p, u, found;
      if (opt) begin
        u = 0;
        for (int i = 1; i < m; i++) if (idx >= bnd[i]) u = i;
        found = 0;
        foreach (used[u][i]) if (used[u][i] == idx) found = 1;
        if (!found) begin
          if (used[u].size() >= ways) begin overflows++; return -1; end
          used[u].push_back(idx);
        end
      end
      if (!c0.exists(idx)) begin c0[idx] = 1; c1[idx] = 1; end
      p = bin_prob(c0[idx], c1[idx]);
      bin_update(c0[idx], c1[idx], b);
      return p;
    endfunction
  endclass

  // model ids (same numbering as the design)
  localparam int NZ7 = 0, EXP7 = 6, RES7 = 17, NZX = 27, NZY = 30, EXPE = 33,
                 THRES = 44, RESE = 52, EXPDC = 54, RESDC = 65, SIGN = 75;

  typedef struct { int id; bit b; int idx; } bin_t;

  function automatic int blen(int m);
    int r; r = 0;
    while (m > 0) begin r++; m >>= 1; end
    return r;
  endfunction
  function automatic int mn(int a, int b); return a < b ? a : b; endfunction

  // Exp-Golomb style coefficient bins: kind 0 = 7x7, 1 = edge, 2 = DC
  function automatic void coef_bins(ref bin_t q[$], input int kind, int v, int fc,
                                    int prior, int nzl, int pos, int zz, int dcctx);
    int m, e, base, ctx, L, p;
    m = v < 0 ? -v : v;
    if (m > 2047) m = 2047;
    e = blen(m);
    base = (kind == 0) ? EXP7 : (kind == 1) ? EXPE : EXPDC;
    for (int i = 0; i < 11; i++) begin
      int ix;
      if (i > e) break;
      if (kind == 0)      ix = ((fc * 11 + prior) * 10 + mn(9, (nzl - 1) / 5)) * 49 + pos;
      else if (kind == 1) ix = ((fc * 11 + prior) * 7 + nzl - 1) * 14 + pos;
      else                ix = fc * 102 + dcctx;
      q.push_back('{base + i, i < e, ix});
    end
    if (e == 0) return;
    q.push_back('{SIGN, v < 0, (fc * 3 + kind) * 11 + e - 1});
    L = e - 1;
    for (int k = 0; k < L; k++) begin
      p = L - 1 - k;
      if (kind == 0) q.push_back('{RES7 + p, (m >> p) & 1, (fc * 10 + e - 2) * 63 + zz - 1});
      else if (kind == 2) q.push_back('{RESDC + p, (m >> p) & 1, fc * 6 + mn(5, e - 2)});
      else begin
        ctx = fc * 2048 + (pos % 16) * 128 + (e - 2) * 8 + mn(7, prior);
        if (k < 7)       q.push_back('{THRES + k, (m >> p) & 1, ctx * (1 << k) + ((m >> (p + 1)) % (1 << k))});
        else if (k == 7) q.push_back('{THRES + 7, (m >> p) & 1, ctx});
        else             q.push_back('{RESE + k - 8, (m >> p) & 1, (fc * 14 + pos) * 7 + mn(6, prior)});
      end
    end
  endfunction

  // fixed-length count bins, MSB first; nmax = 49 or 7
  function automatic void count_bins(ref bin_t q[$], input int base, int nbits, int nmax, int v, int ctx);
    for (int b = nbits - 1; b >= 0; b--) begin
      int pr;
      pr = (nmax >> (b + 1)) + 1;
      q.push_back('{base + b, (v >> b) & 1, ctx * pr + (v >> (b + 1))});
    end
  endfunction

  function automatic int zz_of(int r, int c);
    // JPEG zigzag: walk the diagonals
    int z, rr, cc;
    z = 0; rr = 0; cc = 0;
    for (int i = 0; i < 64; i++) begin
      if (rr == r && cc == c) return i;
      if ((rr + cc) % 2 == 0) begin
        if (cc == 7) rr++; else if (rr == 0) cc++; else begin rr--; cc++; end
      end else begin
        if (rr == 7) cc++; else if (cc == 0) rr++; else begin rr++; cc--; end
      end
    end
    return -1;
  endfunction

  typedef int blk_t [64];

  function automatic int prior_of(int a, int l);
    int ma, ml;
    ma = a < 0 ? -a : a; ml = l < 0 ? -l : l;
    return mn(10, blen((ma + ml + 1) / 2));
  endfunction

  // All bins of one block in coding order.
  function automatic void block_bins(ref bin_t q[$], input blk_t cur, blk_t ab, blk_t lb,
                                     bit ha, bit hl, int fc);
    int nz7, nzx, nzy, nza, nzl_b, nzxa, nzyl, left, k, p, pred, res, ctx, spread;
    int order7 [$];
    nz7 = 0; nzx = 0; nzy = 0; nza = 0; nzl_b = 0; nzxa = 0; nzyl = 0;
    for (int r = 1; r < 8; r++) for (int c = 1; c < 8; c++) begin
      if (cur[r*8+c] != 0) nz7++;
      if (ha && ab[r*8+c] != 0) nza++;
      if (hl && lb[r*8+c] != 0) nzl_b++;
    end
    for (int i = 1; i < 8; i++) begin
      if (cur[i] != 0) nzx++;
      if (cur[i*8] != 0) nzy++;
      if (ha && ab[i] != 0) nzxa++;
      if (hl && lb[i*8] != 0) nzyl++;
    end
    // 7x7 coding order
    for (int z = 0; z < 64; z++)
      for (int r = 1; r < 8; r++) for (int c = 1; c < 8; c++)
        if (zz_of(r, c) == z) order7.push_back(r * 8 + c);
    ctx = fc * 10 + ((nza + nzl_b + 1) / 2) / 5;
    count_bins(q, NZ7, 6, 49, nz7, ctx);
    left = nz7; k = 0;
    while (left > 0) begin
      p = order7[k];
      coef_bins(q, 0, cur[p], fc, prior_of(ha ? ab[p] : 0, hl ? lb[p] : 0), left, k, zz_of(p / 8, p % 8), 0);
      if (cur[p] != 0) left--;
      k++;
    end
    count_bins(q, NZX, 3, 7, nzx, (fc * 8 + mn(7, nz7 / 7)) * 8 + nzxa);
    left = nzx; k = 0;
    while (left > 0) begin
      p = k + 1;
      coef_bins(q, 1, cur[p], fc, prior_of(ha ? ab[p] : 0, hl ? lb[p] : 0), left, k, zz_of(0, k + 1), 0);
      if (cur[p] != 0) left--;
      k++;
    end
    count_bins(q, NZY, 3, 7, nzy, (fc * 8 + mn(7, nz7 / 7)) * 8 + nzyl);
    left = nzy; k = 0;
    while (left > 0) begin
      p = (k + 1) * 8;
      coef_bins(q, 1, cur[p], fc, prior_of(ha ? ab[p] : 0, hl ? lb[p] : 0), left, k + 7, zz_of(k + 1, 0), 0);
      if (cur[p] != 0) left--;
      k++;
    end
    if (ha && hl) pred = (ab[0] + lb[0]) >>> 1;
    else if (hl) pred = lb[0];
    else if (ha) pred = ab[0];
    else pred = 0;
    res = cur[0] - pred;
    if (res > 2047) res = 2047;
    if (res < -2047) res = -2047;
    spread = lb[0] - ab[0];
    if (spread < 0) spread = -spread;
    coef_bins(q, 2, res, fc, 0, 0, 0, 0, (ha && hl) ? mn(101, spread) : 0);
  endfunction

endpackage
