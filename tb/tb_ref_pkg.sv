// tb_ref_pkg -- reference models shared by the testbenches.
//
// Written from the design rules, not from the RTL's structure: the station
// coincidence model lists every fine position, counts hit layers, sorts the
// firing positions by priority key; the address model walks the coincidence
// patterns over sorted ID lists; the table contents used by the tests are
// hash functions of the address, so any entry can be predicted.
package tb_ref_pkg;
  import emtrig_pkg::*;

  typedef int int_q[$];

  // ---------------- table contents used by the tests ----------------
  function automatic logic [PT_W-1:0] pos_lut_f(int a);
    return PT_W'((a * 7 + (a >> 5) * 3 + 1) % 16);
  endfunction
  function automatic logic [PT_W-1:0] ang_lut_f(int a);
    return PT_W'((a * 11 + (a >> 4) * 5 + 2) % 16);
  endfunction
  // Merger: the highest of the three pT codes, except that a zero angle pT
  // vetoes the track (pT 0): shows the table can express more than max().
  function automatic logic [PT_W-1:0] merger_f(int bw, int pos, int ang);
    int m;
    if (ang == 0) return '0;
    m = bw;
    if (pos > m) m = pos;
    if (ang > m) m = ang;
    return PT_W'(m);
  endfunction
  function automatic segment_t seg_f(int unit, int sub, int addr);
    int h;
    h = (addr * 2654435761 + unit * 40503 + sub * 977) ^ (addr >> 3);
    return SEG_W'(h);
  endfunction

  // ---------------- station coincidence ----------------
  // Channel bit of layer l covering fine position k (bus layout of the design).
  function automatic int ref_bit(int nlayer, int nch, int l, int k);
    int base, ch;
    if (l == 0) begin base = 0; ch = k / nlayer + 1; end
    else begin base = (nch + 2) + (l - 1) * (nch + 1); ch = (k + l) / nlayer; end
    return base + ch;
  endfunction

  // Position IDs of one coincidence type, best first, at most nout.
  function automatic int_q ref_coin(logic [M1_BUS-1:0] bus, int nlayer, int nch, int req,
                                    int nout, bit center);
    int_q fire, res;
    int npos = nlayer * nch;
    for (int k = 0; k < npos; k++) begin
      int n = 0;
      for (int l = 0; l < nlayer; l++) n += bus[ref_bit(nlayer, nch, l, k)];
      if (n == req) fire.push_back(k);
    end
    // selection sort by priority key (smaller key first)
    while (fire.size() > 0 && res.size() < nout) begin
      int bi = 0;
      for (int i = 1; i < fire.size(); i++) begin
        int ki, kb, di, db;
        ki = fire[i]; kb = fire[bi];
        di = center ? ((2*ki - (npos-1)) < 0 ? -(2*ki - (npos-1)) : (2*ki - (npos-1))) : 0;
        db = center ? ((2*kb - (npos-1)) < 0 ? -(2*kb - (npos-1)) : (2*kb - (npos-1))) : 0;
        if (di < db || (di == db && ki > kb)) bi = i;
      end
      res.push_back(fire[bi]);
      fire.delete(bi);
    end
    return res;
  endfunction

  // ---------------- RAM address generation ----------------
  function automatic int_q sort_desc(int_q q);
    int_q r = q;
    r.rsort();
    return r;
  endfunction

  // m1[t], m2[t], m3[t]: ID lists per coincidence type (M1 ids full 0..95).
  function automatic int_q ref_addrs(int_q m1 [3], int_q m2 [2], int_q m3 [2], int sub,
                                     output int_q pats);
    int_q res;
    int w0 = (sub * (M1_POS - M1_WIN)) / (N_SUB - 1);
    // Table I, priority order: {M1 type, M2 type, M3 type}
    int pat [8][3] = '{'{0,0,0}, '{1,0,0}, '{0,1,0}, '{0,0,1},
                       '{1,1,0}, '{1,0,1}, '{0,1,1}, '{2,0,0}};
    pats = {};
    for (int p = 0; p < 8; p++) begin
      int_q a1, a2;
      foreach (m1[pat[p][0]][i])
        if (m1[pat[p][0]][i] >= w0 && m1[pat[p][0]][i] < w0 + 32) a1.push_back(m1[pat[p][0]][i] - w0);
      a1 = sort_desc(a1);
      a2 = sort_desc(m2[pat[p][1]]);
      if (m3[pat[p][2]].size() == 0) continue;
      foreach (a1[i]) foreach (a2[j])
        if (res.size() < 8) begin
          res.push_back((a1[i] << 7) | (a2[j] << 2) | m3[pat[p][2]][0]);
          pats.push_back(p);
        end else pats.push_back(-1);  // dropped: more than eight
    end
    return res;
  endfunction

  // Full Unit model: expected address list per Subunit.
  function automatic int_q ref_unit(logic [M1_BUS-1:0] w1, logic [M2_BUS-1:0] w2,
                                    logic [M3_BUS-1:0] w3, int sub, output int_q pats);
    int_q m1 [3], m2 [2], m3 [2];
    for (int t = 0; t < 3; t++) m1[t] = ref_coin(w1, 3, 32, 3 - t, 2, 1);
    for (int t = 0; t < 2; t++) m2[t] = ref_coin(M1_BUS'(w2), 2, 16, 2 - t, 2, 1);
    for (int t = 0; t < 2; t++) m3[t] = ref_coin(M1_BUS'(w3), 2, 2, 2 - t, 1, 0);
    return ref_addrs(m1, m2, m3, sub, pats);
  endfunction

  // ---------------- stimulus ----------------
  // Hits of a muon crossing fine position k of a station, each layer firing
  // with probability eff_pct, plus random noise hits with probability noise_pct.
  function automatic logic [M1_BUS-1:0] gen_station(int nlayer, int nch, int bus_w, int nmu,
                                                    int eff_pct, int noise_pct);
    logic [M1_BUS-1:0] b = '0;
    for (int i = 0; i < bus_w; i++) if (($urandom % 100) < noise_pct) b[i] = 1'b1;
    for (int m = 0; m < nmu; m++) begin
      int k = $urandom % (nlayer * nch);
      for (int l = 0; l < nlayer; l++)
        if (($urandom % 100) < eff_pct) b[ref_bit(nlayer, nch, l, k)] = 1'b1;
    end
    return b;
  endfunction

endpackage
