// fpr_ref_pkg: behavioural reference models used by the testbenches.
//
// * naf_terms()   - canonical (non-adjacent form) digits of a significand, computed with
//                   the textbook digit-by-digit loop (d = 2 - (x mod 4) for odd x), not
//                   with the carry trick the encoder uses.
// * ref_pe        - cycle model of one term-serial PE: it keeps the accumulator as a
//                   64-bit integer scaled by 2^40 below the accumulator LSB, applies the
//                   same scheduling rules (base = min K, window of 3, out-of-bounds
//                   threshold) and rounds the exact per-cycle sum to nearest even.
// * bf16 helpers  - conversion to and from real numbers for tolerance checks.
package fpr_ref_pkg;

  typedef struct {
    bit       valid;
    bit       neg;
    int       pos;
  } rterm_t;

  typedef rterm_t tlist_t[$];

  // MSB-first list of signed power-of-two terms of the 8-bit significand of v
  function automatic tlist_t naf_terms(logic [15:0] v);
    tlist_t l;
    int     x, j;
    rterm_t t;
    int     dig[10];
    l = {};
    if (v[14:7] == 0) return l;
    x = 128 + int'(v[6:0]);
    for (j = 0; j < 10; j++) dig[j] = 0;
    j = 0;
    while (x != 0) begin
      if (x % 2 != 0) begin
        dig[j] = 2 - (x % 4);
        x = x - dig[j];
      end
      x = x / 2;
      j++;
    end
    for (j = 9; j >= 0; j--) begin
      if (dig[j] != 0) begin
        t.valid = 1; t.neg = (dig[j] < 0); t.pos = 8 - j;
        l.push_back(t);
      end
    end
    return l;
  endfunction

  function automatic real bf16_to_real(logic [15:0] v);
    real r;
    int e;
    if (v[14:7] == 0) return 0.0;
    e = int'(v[14:7]) - 127;
    r = 1.0 + real'(v[6:0]) / 128.0;
    while (e > 0) begin r = r * 2.0; e--; end
    while (e < 0) begin r = r / 2.0; e++; end
    return v[15] ? -r : r;
  endfunction

  function automatic logic [15:0] mk_bf16(bit s, int e, int m);
    return {s, 8'(e), 7'(m)};
  endfunction

  class ref_pe;
    longint acc;        // signed significand, hidden bit at 2^12
    int     eacc;
    int     emax;
    int     delta[8];
    bit     psign[8];
    bit     pzero[8];
    int     bm[8];
    bit     taken[8];
    bit     obd[8];
    bit     active;
    // results of the last evaluate()
    bit     consumed[8];
    bit     fin[8];
    bit     go[8];
    bit     stall, obskip;
    longint acc_n;
    int     eacc_n;
    bit     upd;
    bit     ob_new[8];

    function new();
      acc = 0; eacc = 0; active = 0;
      foreach (taken[i]) begin taken[i] = 0; obd[i] = 0; end
    endfunction

    // the products' exponent information for a new set (own computation)
    function void prepare(logic [15:0] a[8], logic [15:0] b[8], output int em,
                          output int dl[8], output bit ps[8], output bit pz[8]);
      int pe[8];
      em = (acc != 0) ? eacc : 0;
      for (int i = 0; i < 8; i++) begin
        pz[i] = (a[i][14:7] == 0) || (b[i][14:7] == 0);
        ps[i] = a[i][15] ^ b[i][15];
        pe[i] = int'(a[i][14:7]) + int'(b[i][14:7]) + 1;
        if (!pz[i] && pe[i] > em) em = pe[i];
      end
      for (int i = 0; i < 8; i++) begin
        dl[i] = pz[i] ? 31 : ((em - pe[i] > 31) ? 31 : em - pe[i]);
      end
    endfunction

    // one cycle: load = this cycle brings new exponent data (a, b); t = visible terms
    function void evaluate(bit load, logic [15:0] a[8], logic [15:0] b[8],
                           rterm_t t[8], int thr);
      int     em, dl[8], ec, k[8], base, lmax, lead, rs, ls;
      bit     ps[8], pz[8], tk[8], od[8], act, cand[8], obt[8], eff[8], neg, stk, grd, rest;
      longint x, xal, tr, y, mag, sh_mag, r, lost;
      int     sh;
      int     bme[8];
      act = load || active;
      if (load) begin
        prepare(a, b, em, dl, ps, pz);
        for (int i = 0; i < 8; i++) begin bme[i] = 128 + int'(b[i][6:0]); tk[i] = 0; od[i] = 0; end
        ec = em;
      end else begin
        em = emax; dl = delta; ps = psign; pz = pzero; bme = bm; tk = taken; od = obd; ec = eacc;
      end
      base = 1000;
      for (int i = 0; i < 8; i++) begin
        k[i]    = dl[i] + t[i].pos + ((ec - em > 127) ? 127 : ec - em);
        cand[i] = act && t[i].valid && !tk[i] && !od[i] && !pz[i];
        obt[i]  = cand[i] && (k[i] > thr);
        eff[i]  = cand[i] && !obt[i];
        if (eff[i] && k[i] < base) base = k[i];
      end
      stall = 0; obskip = 0;
      tr = 0;
      for (int i = 0; i < 8; i++) begin
        go[i]       = eff[i] && (k[i] - base <= 3);
        ob_new[i]   = obt[i] || (go[i] && k[i] >= thr);
        consumed[i] = act && (go[i] || obt[i] || tk[i] || od[i] || pz[i]);
        fin[i]      = act && (od[i] || ob_new[i] || pz[i]);
        if (eff[i] && !go[i]) stall = 1;
        if (obt[i]) obskip = 1;
        if (go[i]) begin
          longint v;
          v = longint'(bme[i]) << (3 - (k[i] - base));
          tr += ((ps[i] ^ t[i].neg) ? -v : v);
        end
      end
      // exact sum, scaled by 2^40 below the accumulator LSB
      x  = acc <<< 40;
      sh = (load && acc != 0) ? (em - eacc) : 0;
      if (sh > 62) sh = 62;
      xal = x >>> sh;
      stk = ((xal <<< sh) != x);
      y   = xal + (tr <<< (42 - base));
      if (tr == 0) y = xal;
      neg = (y < 0);
      mag = neg ? (-y - (stk ? 1 : 0)) : y;
      lead = -1;
      for (int j = 0; j < 63; j++) if (mag[j]) lead = j;
      lmax = ec - em;
      rs = 0; ls = 0; eacc_n = ec;
      if (lead > 52) begin rs = lead - 52; eacc_n = ec + rs; end
      else if (lead >= 0 && lead < 52) begin
        ls = 52 - lead; if (ls > lmax) ls = lmax; eacc_n = ec - ls;
      end
      lost   = mag & ((64'sd1 <<< rs) - 1);
      sh_mag = (mag >>> rs) <<< ls;
      grd    = sh_mag[39];
      rest   = ((sh_mag & ((64'sd1 <<< 39) - 1)) != 0) || (lost != 0) || stk;
      r      = sh_mag >>> 40;
      if (grd && (rest || r[0])) r = r + 1;
      if (r >= 64'sd8192) begin r = r >>> 1; eacc_n = eacc_n + 1; end
      acc_n = neg ? -r : r;
      upd   = act && (load || (tr != 0) || go[0] || go[1] || go[2] || go[3] ||
                      go[4] || go[5] || go[6] || go[7]);
      // keep what the commit needs
      if (load) begin
        emax = em; delta = dl; psign = ps; pzero = pz; bm = bme;
        taken = tk; obd = od;
      end
      if (load) active = 1;
    endfunction

    function void commit(bit adv[8], bit set_end);
      for (int i = 0; i < 8; i++) begin
        taken[i] = (set_end || adv[i]) ? 0 : (active && (taken[i] || go[i]));
        obd[i]   = set_end ? 0 : (active && (obd[i] || ob_new[i]));
      end
      if (upd) begin acc = acc_n; eacc = eacc_n; end
      if (set_end) active = 0;
    endfunction

    function logic [15:0] result();
      longint m;
      int     lead, e;
      logic [15:0] r;
      m = (acc < 0) ? -acc : acc;
      if (m == 0) return 16'h0000;
      lead = -1;
      for (int j = 0; j < 20; j++) if (m[j]) lead = j;
      e = eacc - 127 + lead - 12;
      if (e >= 255) return {acc < 0, 8'hff, 7'd0};
      if (e <= 0) return 16'h0000;
      r = {acc < 0, 8'(e), 7'((m << 7 >> lead) & 127)};
      return r;
    endfunction
  endclass

  // cycle model of one tile column: ROWS PEs sharing one term encoder, the exponent
  // block serving the even rows in the first cycle of a set and the odd rows in the
  // second. run_set() processes one set and returns its number of cycles.
  class ref_column;
    int     rows;
    ref_pe  pe[];
    int     n_stall, n_obskip;

    function new(int r);
      rows = r;
      pe = new[r];
      foreach (pe[i]) pe[i] = new();
      n_stall = 0; n_obskip = 0;
    endfunction

    function int run_set(logic [15:0] a[8], logic [15:0] b[][8], int thr);
      tlist_t q[8];
      int     idx[8], cyc;
      bit     empty, adv[8], drop[8];
      rterm_t tv[8];
      for (int i = 0; i < 8; i++) begin q[i] = naf_terms(a[i]); idx[i] = 0; end
      cyc = 0;
      do begin
        for (int i = 0; i < 8; i++) begin
          if (idx[i] < q[i].size()) tv[i] = q[i][idx[i]];
          else begin tv[i].valid = 0; tv[i].neg = 0; tv[i].pos = 0; end
        end
        for (int r = 0; r < rows; r++)
          pe[r].evaluate((cyc == 0 && r % 2 == 0) || (cyc == 1 && r % 2 == 1), a, b[r], tv, thr);
        for (int i = 0; i < 8; i++) begin
          adv[i] = tv[i].valid; drop[i] = 1;
          for (int r = 0; r < rows; r++) begin
            adv[i]  = adv[i] && pe[r].consumed[i];
            drop[i] = drop[i] && pe[r].fin[i];
          end
          if (drop[i]) idx[i] = q[i].size();
          else if (adv[i]) idx[i]++;
        end
        for (int r = 0; r < rows; r++) begin
          if (pe[r].stall) n_stall++;
          if (pe[r].obskip) n_obskip++;
        end
        empty = 1;
        for (int i = 0; i < 8; i++) if (idx[i] < q[i].size()) empty = 0;
        for (int r = 0; r < rows; r++) pe[r].commit(adv, (cyc >= 1) && empty);
        cyc++;
      end while (!(cyc >= 2 && empty));
      return cyc;
    endfunction
  endclass

endpackage
