// tb_ref_pkg: behavioural reference model of the DAPPER-H tracker, used by
// the testbenches to predict the RTL's outputs.
//
// It is written from the algorithm description, not from the RTL: the cipher
// works on integers with explicit masks, the key generator is a plain 64-bit
// xorshift, and the tracker class keeps its counters in dynamic arrays and
// recomputes every mitigation by brute force over the group members.
package tb_ref_pkg;

  function automatic longint unsigned mask(int unsigned w);
    return (w >= 64) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << w) - 1);
  endfunction

  function automatic longint unsigned xs64(longint unsigned s);
    s = s ^ (s << 13);
    s = s ^ (s >> 7);
    s = s ^ (s << 17);
    return s;
  endfunction

  // Round function on a cw-bit word.
  function automatic longint unsigned ref_f(longint unsigned x, longint unsigned k, int unsigned cw);
    longint unsigned a, b, r1, r2, r5, r7;
    a  = (x ^ k) & mask(cw);
    r1 = ((a << 1) | (a >> (cw - 1))) & mask(cw);
    r2 = ((a << 2) | (a >> (cw - 2))) & mask(cw);
    r5 = ((a << 5) | (a >> (cw - 5))) & mask(cw);
    b  = a ^ (r1 & r2) ^ r5;
    r7 = ((b << 7) | (b >> (cw - 7))) & mask(cw);
    return (b + r7) & mask(cw);
  endfunction

  // Feistel cipher; keys holds round key r at bits [r*kb +: kb].
  function automatic longint unsigned ref_cipher(longint unsigned x, longint unsigned keys,
                                                 int unsigned rb, int unsigned rounds,
                                                 int unsigned kb, bit dec);
    int unsigned lob = rb / 2;
    int unsigned hib = rb - lob;
    int unsigned cw  = (kb > hib) ? kb : hib;
    longint unsigned hi = (x >> lob) & mask(hib);
    longint unsigned lo = x & mask(lob);
    longint unsigned f, k;
    int unsigned r;
    for (int unsigned i = 0; i < rounds; i++) begin
      r = dec ? rounds - 1 - i : i;
      k = (keys >> (r * kb)) & mask(kb);
      if (r % 2 == 0) begin
        f  = ref_f(lo, k, cw);
        hi = hi ^ (f & mask(hib)) ^ (f >> (cw - hib));
      end else begin
        f  = ref_f(hi, k, cw);
        lo = lo ^ (f & mask(lob)) ^ (f >> (cw - lob));
      end
    end
    return (hi << lob) | lo;
  endfunction

  class dapper_ref;
    int unsigned rb, bb, gb, cb, nm, rounds, kb;
    longint unsigned st1, st2, k1, k2;
    int unsigned t1[], t2[];
    longint unsigned bv[];
    // results of the last activation
    bit last_filtered, last_trigger;
    longint unsigned shared_rows[$];
    int unsigned last_g1, last_g2, last_reset1, last_reset2;

    function new(int unsigned rb, int unsigned bb, int unsigned gb, int unsigned cb,
                 int unsigned nm, int unsigned rounds, int unsigned kb,
                 longint unsigned seed, longint unsigned salt1, longint unsigned salt2);
      this.rb = rb; this.bb = bb; this.gb = gb; this.cb = cb; this.nm = nm;
      this.rounds = rounds; this.kb = kb;
      st1 = ((seed ^ salt1) == 0) ? salt1 : (seed ^ salt1);
      st2 = ((seed ^ salt2) == 0) ? salt2 : (seed ^ salt2);
      t1 = new[1 << (rb - gb)];
      t2 = new[1 << (rb - gb)];
      bv = new[1 << (rb - gb)];
    endfunction

    // Refresh-window reset: new keys, all tables zero.
    function void rekey_clear();
      st1 = xs64(st1); st2 = xs64(st2);
      k1 = st1 & mask(rounds * kb);
      k2 = st2 & mask(rounds * kb);
      foreach (t1[i]) begin t1[i] = 0; t2[i] = 0; bv[i] = 0; end
    endfunction

    function int unsigned grp1(longint unsigned row);
      return int'(ref_cipher(row, k1, rb, rounds, kb, 0) >> gb);
    endfunction
    function int unsigned grp2(longint unsigned row);
      return int'(ref_cipher(row, k2, rb, rounds, kb, 0) >> gb);
    endfunction

    function int unsigned sat_inc(int unsigned v);
      return (v == (1 << cb) - 1) ? v : v + 1;
    endfunction

    function void act(longint unsigned row);
      int unsigned g1 = grp1(row);
      int unsigned g2 = grp2(row);
      int unsigned bank = int'(row >> (rb - bb));
      longint unsigned oh = 64'd1 << bank;
      last_filtered = 0; last_trigger = 0;
      shared_rows.delete();
      if (bv[g1][bank]) begin
        t1[g1] = sat_inc(t1[g1]);
        bv[g1] = oh;
      end else begin
        bv[g1] = bv[g1] | oh;
        last_filtered = 1;
      end
      t2[g2] = sat_inc(t2[g2]);
      if (t1[g1] >= nm && t2[g2] >= nm) begin
        int unsigned r1 = 0, r2 = 0;
        last_trigger = 1;
        for (int unsigned i = 0; i < (1 << gb); i++) begin
          longint unsigned m  = (longint'(g1) << gb) | i;
          longint unsigned rr = ref_cipher(m, k1, rb, rounds, kb, 1);
          int unsigned o2 = grp2(rr);
          if (o2 == g2) shared_rows.push_back(rr);
          else if (t2[o2] > r1) r1 = t2[o2];
        end
        for (int unsigned i = 0; i < (1 << gb); i++) begin
          longint unsigned m  = (longint'(g2) << gb) | i;
          longint unsigned rr = ref_cipher(m, k2, rb, rounds, kb, 1);
          int unsigned o1 = grp1(rr);
          if (o1 != g1 && t1[o1] > r2) r2 = t1[o1];
        end
        t1[g1] = r1; t2[g2] = r2; bv[g1] = 0;
        last_g1 = g1; last_g2 = g2; last_reset1 = r1; last_reset2 = r2;
      end
    endfunction
  endclass

endpackage
