// tb_ans_model: reference models for the testbenches.
//
// TansModel and RansModel build the coder tables from normalised counts
// (tANS: counts n_s summing to 256, symbols spread over the 256 states with
// the usual odd step 163; rANS: frequencies f_s summing to 65536) and
// compress a list of coding pairs in software, bit by bit, into the word
// stream the hardware is expected to produce: full words (oldest bit first,
// at the MSB), then the pending bits right-aligned, then the header word
// {pending count, final state}. Pairs are compressed last to first, so that
// a decompressor reading the words backwards returns them first to last.
package tb_ans_model;
  import ans_pkg::*;

  typedef struct packed {
    logic [5:0] code;
    logic [7:0] ad;
  } tpair_t;

  // bit stack shared by both models
  class BitStack;
    bit bits[$];
    function void push(longint unsigned v, int n);
      for (int i = n - 1; i >= 0; i--) bits.push_back(v[i]);
    endfunction
    // words of width w, then the partial word and a header with `state`
    function void finish(int w, int sbits, longint unsigned state, ref longint unsigned words[$]);
      int nfull, r;
      longint unsigned v;
      nfull = bits.size() / w;
      r = bits.size() % w;
      for (int i = 0; i < nfull; i++) begin
        v = 0;
        for (int j = 0; j < w; j++) v = (v << 1) | longint'(bits[i * w + j]);
        words.push_back(v);
      end
      v = 0;
      for (int j = 0; j < r; j++) v = (v << 1) | longint'(bits[nfull * w + j]);
      words.push_back(v);
      words.push_back((longint'(r) << sbits) | state);
    endfunction
  endclass

  // log2 floor
  function automatic int flog2(longint unsigned v);
    int r;
    r = -1;
    while (v != 0) begin
      v = v >> 1;
      r++;
    end
    return r;
  endfunction

  class TansModel;
    int nc;
    int n[64], k[64], cum[64], adl[64];
    int dsym[256], dnb[256], dbase[256], est[256];

    // random counts for nc codes, skewed towards low codes
    function void randomize_counts(int ncodes);
      int left;
      nc = ncodes;
      for (int s = 0; s < 64; s++) begin
        n[s] = (s < nc) ? 1 : 0;
        adl[s] = $urandom_range(0, 8);
      end
      left = 256 - nc;
      while (left > 0) begin
        int s;
        s = $urandom_range(0, nc - 1);
        if ($urandom_range(0, 1) == 1) s = s / 4;
        n[s]++;
        left--;
      end
    endfunction

    function void build();
      int spread[256], nxt[64];
      int pos, c;
      c = 0;
      for (int s = 0; s < 64; s++) begin
        cum[s] = c;
        c += n[s];
        k[s] = (n[s] > 0) ? 8 - flog2(n[s]) : 0;
        nxt[s] = n[s];
      end
      pos = 0;
      for (int s = 0; s < 64; s++)
        for (int j = 0; j < n[s]; j++) begin
          spread[pos] = s;
          pos = (pos + 163) & 255;
        end
      for (int p = 0; p < 256; p++) begin
        int s, x, nb;
        s = spread[p];
        x = nxt[s]++;
        nb = 8 - flog2(x);
        dsym[p] = s;
        dnb[p] = nb;
        dbase[p] = (x << nb) - 256;
        est[cum[s] + x - n[s]] = p;
      end
    endfunction

    // draw a code with the configured probabilities
    function int draw();
      int slot;
      slot = $urandom_range(0, 255);
      for (int s = 0; s < 64; s++) if (slot >= cum[s] && slot < cum[s] + n[s]) return s;
      return 0;
    endfunction

    function void encode(tpair_t pairs[$], ref longint unsigned words[$]);
      BitStack bs;
      int x;
      bs = new();
      x = 256;
      for (int i = pairs.size() - 1; i >= 0; i--) begin
        int s, nb;
        s = int'(pairs[i].code);
        nb = 0;
        while ((x >> nb) >= 2 * n[s]) nb++;
        bs.push(longint'(x), nb);
        bs.push(longint'(pairs[i].ad) >> (8 - adl[s]), adl[s]);
        x = 256 + est[cum[s] + (x >> nb) - n[s]];
      end
      bs.finish(16, 8, longint'(x - 256), words);
    endfunction

    // counts proportional to a histogram of codes, summing to 256
    function void from_hist(int hist[64], int adls[64]);
      normalise(hist, 256, n);
      for (int s = 0; s < 64; s++) adl[s] = adls[s];
      build();
    endfunction
  endclass

  // scale a histogram to counts summing to total; every code seen keeps >= 1
  function automatic void normalise(int hist[64], int total, ref int cnt[64]);
    longint sum;
    int big, acc;
    sum = 0;
    for (int s = 0; s < 64; s++) sum += hist[s];
    acc = 0;
    big = 0;
    for (int s = 0; s < 64; s++) begin
      cnt[s] = (hist[s] == 0) ? 0 : int'((longint'(hist[s]) * total) / sum);
      if (hist[s] != 0 && cnt[s] == 0) cnt[s] = 1;
      acc += cnt[s];
      if (cnt[s] > cnt[big]) big = s;
    end
    cnt[big] += total - acc;
  endfunction

  class RansModel;
    int nc;
    int f[64], c[64], k[64], adl[64];

    function void randomize_freqs(int ncodes);
      int left, cc;
      nc = ncodes;
      for (int s = 0; s < 64; s++) begin
        f[s] = (s < nc) ? 1 : 0;
        adl[s] = $urandom_range(0, 8);
      end
      left = 65536 - nc;
      while (left > 0) begin
        int s, amt;
        s = $urandom_range(0, nc - 1);
        if ($urandom_range(0, 1) == 1) s = s / 4;
        amt = (left > 700) ? $urandom_range(1, 700) : left;
        f[s] += amt;
        left -= amt;
      end
      cc = 0;
      for (int s = 0; s < 64; s++) begin
        c[s] = cc;
        cc += f[s];
        k[s] = (f[s] > 0) ? 16 - flog2(f[s]) : 0;
      end
    endfunction

    function int draw();
      int slot;
      slot = $urandom_range(0, 65535);
      for (int s = 0; s < 64; s++) if (slot >= c[s] && slot < c[s] + f[s]) return s;
      return 0;
    endfunction

    function void encode(tpair_t pairs[$], ref longint unsigned words[$]);
      BitStack bs;
      longint unsigned x, xs;
      bs = new();
      x = 64'd1 << 24;
      for (int i = pairs.size() - 1; i >= 0; i--) begin
        int s, nb;
        s = int'(pairs[i].code);
        nb = 0;
        while ((x >> nb) >= longint'(f[s]) * 512) nb++;
        bs.push(x, nb);
        bs.push(longint'(pairs[i].ad) >> (8 - adl[s]), adl[s]);
        xs = x >> nb;
        x = ((xs / longint'(f[s])) << 16) + longint'(c[s]) + (xs % longint'(f[s]));
      end
      bs.finish(32, 24, x - (64'd1 << 24), words);
    endfunction
    function void from_hist(int hist[64], int adls[64]);
      int cc;
      normalise(hist, 65536, f);
      cc = 0;
      for (int s = 0; s < 64; s++) begin
        adl[s] = adls[s];
        c[s] = cc;
        cc += f[s];
        k[s] = (f[s] > 0) ? 16 - flog2(f[s]) : 0;
      end
    endfunction
  endclass

  // A number format carried as coding pairs, with every table the channel
  // glue needs, and reference conversions value <-> pair in plain
  // arithmetic.
  //  make_bf16: code 0 = zero (direct value), codes 1.. = exponents
  //             emin..emax, each with sign + mb mantissa bits (mb = 7 is
  //             lossless bfloat16, mb = 3 is the paper's fp12 E8M3).
  //  make_int:  the paper's integer code: code = position of leading one + 1,
  //             0 for zero, sign + up to 7 bits below the leading one.
  class NumFormat;
    bit fixed;
    int adl[64], fpx_exp[64], fxx_sh[64], dval[64];
    bit dir[64];
    int fpr_code[256], fpr_mb[256], fxr_code[32], fxr_mb[32];

    function void clear();
      for (int c = 0; c < 64; c++) begin
        adl[c] = 0; fpx_exp[c] = 0; fxx_sh[c] = 0; dval[c] = 0; dir[c] = 0;
      end
      for (int e = 0; e < 256; e++) begin fpr_code[e] = 0; fpr_mb[e] = 0; end
      for (int i = 0; i < 32; i++) begin fxr_code[i] = 0; fxr_mb[i] = 0; end
    endfunction

    function void make_bf16(int emin, int emax, int mb);
      clear();
      fixed = 0;
      dir[0] = 1;
      for (int e = emin; e <= emax; e++) begin
        adl[e - emin + 1] = 1 + mb;
        fpx_exp[e - emin + 1] = e;
      end
      for (int e = 1; e < 256; e++) begin
        fpr_mb[e] = mb;
        fpr_code[e] = (e < emin) ? 1 : (e > emax) ? emax - emin + 1 : e - emin + 1;
      end
    endfunction

    function void make_int();
      clear();
      fixed = 1;
      dir[0] = 1;
      for (int k = 1; k <= 17; k++) begin
        adl[k] = 1 + ((k - 1 < 7) ? k - 1 : 7);
        fxx_sh[k] = k - 8;
      end
      for (int i = 0; i < 32; i++) begin
        fxr_code[i] = (i <= 17) ? i : 17;
        fxr_mb[i] = (i == 0) ? 0 : ((i - 1 < 7) ? i - 1 : 7);
      end
    endfunction

    function tpair_t to_pair(logic [15:0] v);
      tpair_t pr;
      logic sg;
      sg = v[15];
      if (!fixed) begin
        int e, m, mb, step, r;
        e = int'(v[14:7]);
        m = int'(v[6:0]);
        if (e == 0) return '0;
        mb = fpr_mb[e];
        step = 1 << (7 - mb);
        r = ((m + step / 2) / step) * step;
        if (r >= 128) begin
          e++;
          r = 0;
        end
        pr.code = 6'(fpr_code[e]);
        pr.ad = {sg, 7'(r)};
      end else begin
        longint a, step;
        int p, mb, frac;
        a = sg ? -longint'($signed(v)) : longint'(v);
        if (a == 0) return '0;
        p = flog2(a);
        mb = fxr_mb[p + 1];
        if (p > mb) begin
          step = longint'(1) << (p - mb);
          a = ((a + step / 2) / step) * step;
        end
        p = flog2(a);
        frac = int'(((a - (longint'(1) << p)) << 7) >> p);
        pr.code = 6'(fxr_code[p + 1]);
        pr.ad = {sg, 7'(frac)};
      end
      pr.ad = ad_trunc(pr.ad, adl[pr.code]);
      return pr;
    endfunction

    function logic [15:0] from_pair(tpair_t pr);
      if (dir[pr.code]) return 16'(dval[pr.code]);
      if (!fixed) return {pr.ad[7], 8'(fpx_exp[pr.code]), pr.ad[6:0]};
      begin
        real r;
        r = real'(128 + int'(pr.ad[6:0])) * (2.0 ** fxx_sh[pr.code]);
        if (pr.ad[7]) r = -r;
        return 16'(longint'($floor(r)));
      end
    endfunction
  endclass

  // test values: bfloat16 with exponents falling off geometrically below
  // emax-1 (never reaching emax, so rounding cannot leave the table), some
  // zeros and all-ones mantissas; or int16 of geometrically falling size.
  function automatic logic [15:0] gen_value(NumFormat f, int emin, int emax);
    if (!f.fixed) begin
      int e;
      logic [6:0] m;
      if ($urandom_range(0, 15) == 0) return 16'h0000;
      e = emax - 1;
      while (e > emin && $urandom_range(0, 99) < 60) e--;
      m = 7'($urandom_range(0, 127));
      if ($urandom_range(0, 7) == 0) m = 7'h7f;
      return {1'($urandom_range(0, 1)), 8'(e), m};
    end else begin
      int a, sh;
      sh = 0;
      while (sh < 15 && $urandom_range(0, 99) < 55) sh++;
      a = $urandom_range(0, 32767) >> sh;
      return ($urandom_range(0, 1) == 1) ? 16'(-a) : 16'(a);
    end
  endfunction

  function automatic cfg_t cw(int chan, cfg_unit_e u, int a, longint d);
    cfg_t c;
    c.we = 1'b1;
    c.chan = 8'(chan);
    c.unit = u;
    c.addr = 8'(a);
    c.data = 48'(d);
    return c;
  endfunction

  // all configuration writes for one channel
  function automatic void chan_cfg(int chan, NumFormat f, bit use_rans, TansModel t, RansModel r,
                                   int len, ref cfg_t q[$]);
    for (int s = 0; s < 64; s++) begin
      q.push_back(cw(chan, U_ADL, s, f.adl[s]));
      q.push_back(cw(chan, U_FPX_LUT, s, (longint'(f.dval[s] & 16'hffff) << 9) |
                                        (longint'(f.dir[s]) << 8) | longint'(f.fpx_exp[s])));
      q.push_back(cw(chan, U_FXX_LUT, s, (longint'(f.dval[s] & 16'hffff) << 7) |
                                        (longint'(f.dir[s]) << 6) | longint'(f.fxx_sh[s] & 63)));
      if (use_rans)
        q.push_back(cw(chan, U_RANS_SYM, s, (longint'(r.k[s]) << 32) | (longint'(r.c[s]) << 16) |
                                           longint'(r.f[s])));
      else
        q.push_back(cw(chan, U_TANS_ESYM, s, (t.cum[s] << 12) | (t.k[s] << 8) | t.n[s]));
    end
    if (!use_rans)
      for (int p = 0; p < 256; p++) begin
        q.push_back(cw(chan, U_TANS_DEC, p, (t.dbase[p] << 10) | (t.dnb[p] << 6) | t.dsym[p]));
        q.push_back(cw(chan, U_TANS_EST, p, t.est[p]));
      end
    for (int e = 0; e < 256; e++) q.push_back(cw(chan, U_FPR_LUT, e, (f.fpr_mb[e] << 6) | f.fpr_code[e]));
    for (int i = 0; i < 32; i++) q.push_back(cw(chan, U_FXR_LUT, i, (f.fxr_mb[i] << 6) | f.fxr_code[i]));
    q.push_back(cw(chan, U_CHAN, 0, (int'(f.fixed) << 1) | int'(use_rans)));
    q.push_back(cw(chan, U_CHAN, 1, len));
  endfunction

  // additional data as a decompressor returns it: adl bits kept, left-aligned
  function automatic logic [7:0] ad_trunc(logic [7:0] ad, int adl);
    return (adl == 0) ? 8'd0 : (ad & (8'hff << (8 - adl)));
  endfunction

endpackage
