// simcom_ref_pkg: behavioural reference model of SimCom for the testbenches.
//
// Written independently of the RTL as plain procedural code over byte
// arrays: compression of one block in one mode, mode selection, approximate
// decompression, plus generators of pixel-like test blocks. The AF is Q1.16
// and the compressed layout is metadata byte, base/run pairs, optional
// remainder - the same conventions as the RTL.
package simcom_ref_pkg;

  localparam int BB = 64;

  typedef struct {
    logic [8*BB-1:0] cdata;     // first 64 compressed bytes
    int              size;      // full compressed size, may exceed 64
    longint          sum;       // sum of max channel differences
    int              nbases;
    bit              rem_stored;
  } ref_res_t;

  function automatic int r_cc(int m);
    int t[6] = '{1, 3, 4, 1, 3, 4};
    return t[m];
  endfunction

  function automatic int r_bpb(int m);
    return (m < 3) ? 1 : 2;
  endfunction

  function automatic int get_byte(logic [8*BB-1:0] d, int i);
    return int'(d[8*i +: 8]);
  endfunction

  // Channel ch of the word starting at byte pos (little-endian channels).
  function automatic int chan(logic [8*BB-1:0] d, int pos, int ch, int bpb);
    if (bpb == 1) return get_byte(d, pos + ch);
    return get_byte(d, pos + 2*ch) + 256 * get_byte(d, pos + 2*ch + 1);
  endfunction

  function automatic int maxdiff(logic [8*BB-1:0] d, int p, int q, int nch, int bpb);
    int m = 0;
    for (int c = 0; c < nch; c++) begin
      int a = chan(d, p, c, bpb);
      int b = chan(d, q, c, bpb);
      int x = (a > b) ? a - b : b - a;
      if (x > m) m = x;
    end
    return m;
  endfunction

  function automatic bit is_similar(int md, int af, int bpb);
    longint maxv = (bpb == 2) ? 65535 : 255;
    return (longint'(md) * 65536) <= (longint'(af) * maxv);
  endfunction

  function automatic ref_res_t ref_compress(int mode, logic [8*BB-1:0] d, int af);
    ref_res_t   res;
    logic [7:0] o [0:255];
    int cc = r_cc(mode), bpb = r_bpb(mode);
    int w = cc * bpb, n = BB / w, r = BB % w;
    int off = 1, nb = 0, basepos = 0, run = 0, lastrun;
    longint sum = 0;
    for (int i = 0; i < 256; i++) o[i] = 8'h00;
    for (int i = 1; i < n; i++) begin
      int md = maxdiff(d, i*w, basepos, cc, bpb);
      sum += md;
      if (is_similar(md, af, bpb)) run++;
      else begin
        for (int k = 0; k < w; k++) o[off+k] = 8'(get_byte(d, basepos + k));
        o[off+w] = 8'(run);
        off += w + 1; nb++;
        basepos = i*w; run = 0;
      end
    end
    for (int k = 0; k < w; k++) o[off+k] = 8'(get_byte(d, basepos + k));
    o[off+w] = 8'(run);
    lastrun = off + w;
    off += w + 1; nb++;
    res.rem_stored = 0;
    if (r > 0) begin
      int md = maxdiff(d, n*w, basepos, r / bpb, bpb);
      if (!is_similar(md, af, bpb)) begin
        for (int k = 0; k < r; k++) o[off+k] = 8'(get_byte(d, n*w + k));
        o[lastrun] = o[lastrun] | 8'h80;
        off += r;
        res.rem_stored = 1;
      end
    end
    o[0] = 8'((mode << 5) | (nb & 31));
    for (int i = 0; i < BB; i++) res.cdata[8*i +: 8] = o[i];
    res.size   = off;
    res.sum    = sum;
    res.nbases = nb;
    return res;
  endfunction

  // Mode with the smallest mean normalized difference, then smallest size,
  // then lowest number.
  function automatic int ref_select(ref_res_t rr [6]);
    int best = 0;
    for (int m = 1; m < 6; m++) begin
      real mean_m = real'(rr[m].sum)    / (((r_bpb(m)    == 2) ? 65535.0 : 255.0) * real'(BB / (r_cc(m)    * r_bpb(m))    - 1));
      real mean_b = real'(rr[best].sum) / (((r_bpb(best) == 2) ? 65535.0 : 255.0) * real'(BB / (r_cc(best) * r_bpb(best)) - 1));
      real tol = 1e-12;
      if (mean_m < mean_b - tol) best = m;
      else if (mean_m <= mean_b + tol && rr[m].size < rr[best].size) best = m;
    end
    return best;
  endfunction

  function automatic logic [8*BB-1:0] ref_decompress(logic [8*BB-1:0] c);
    logic [8*BB-1:0] d = '0;
    int mode = get_byte(c, 0) >> 5, nb = get_byte(c, 0) & 31;
    int w = r_cc(mode) * r_bpb(mode), n = BB / w, r = BB % w;
    int pos = 1, wi = 0, lastbase = 1;
    for (int p = 0; p < nb && wi < n; p++) begin
      int run = get_byte(c, pos + w) & 127;
      for (int j = 0; j <= run && wi < n; j++) begin
        for (int k = 0; k < w; k++) d[8*(wi*w + k) +: 8] = 8'(get_byte(c, pos + k));
        wi++;
      end
      lastbase = pos;
      pos += w + 1;
    end
    if (r > 0) begin
      bit rb = (get_byte(c, lastbase + w) & 128) != 0;
      for (int k = 0; k < r; k++)
        d[8*(n*w + k) +: 8] = rb ? 8'(get_byte(c, lastbase + w + 1 + k)) : 8'(get_byte(c, lastbase + k));
    end
    return d;
  endfunction

  // A bitmap-like block: pixels of cc channels x bpb bytes, starting at a
  // random phase, following a random colour with per-channel noise of at most
  // +-noise and an occasional jump (edge) with probability jump_pct.
  function automatic logic [8*BB-1:0] gen_block(int cc, int bpb, int noise, int jump_pct);
    logic [8*BB-1:0] d;
    int maxv = (bpb == 2) ? 65535 : 255;
    int col [4];
    // A 64-byte block starts at a pixel boundary when the pixel size divides
    // 64; otherwise (3-channel formats) it starts at a random channel.
    int phase = ((BB % (cc*bpb)) == 0) ? 0 : bpb * $urandom_range(cc - 1, 0);
    int pos = -phase;
    for (int c = 0; c < 4; c++) col[c] = $urandom_range(maxv, 0);
    while (pos < BB) begin
      if ($urandom_range(99, 0) < jump_pct)
        for (int c = 0; c < 4; c++) col[c] = $urandom_range(maxv, 0);
      for (int c = 0; c < cc; c++) begin
        int v = col[c] + $urandom_range(2*noise, 0) - noise;
        if (v < 0) v = 0;
        if (v > maxv) v = maxv;
        for (int b = 0; b < bpb; b++) begin
          int p = pos + c*bpb + b;
          if (p >= 0 && p < BB) d[8*p +: 8] = 8'(v >> (8*b));
        end
      end
      pos += cc * bpb;
    end
    return d;
  endfunction

  function automatic logic [8*BB-1:0] gen_random();
    logic [8*BB-1:0] d;
    for (int i = 0; i < BB; i++) d[8*i +: 8] = 8'($urandom_range(255, 0));
    return d;
  endfunction

endpackage
