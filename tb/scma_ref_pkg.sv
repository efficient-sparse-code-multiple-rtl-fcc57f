// scma_ref_pkg: reference model of the SCMA decoder for the testbenches.
//
// Written independently of the RTL: the factor graph comes from the 4x6
// matrix F printed in the paper, the arithmetic is plain integer code that
// follows the decoder's documented fixed-point rules (saturation to 16 bits,
// Q3.12 distributed-matrix inverse, Q8.8 1/N0, ties to the lower codeword),
// and the iteration loop is a direct transcription of the Max-Log message
// passing with early termination and self-adaption. It also provides a test
// codebook and a small channel model.
package scma_ref_pkg;

  localparam int RK = 4, RJ = 6, RM = 4, RDF = 3, RNE = 12;

  // Factor graph matrix of the paper (rows: resources, columns: users).
  localparam bit F [RK][RJ] = '{
    '{1, 1, 1, 0, 0, 0},
    '{1, 0, 0, 1, 1, 0},
    '{0, 1, 0, 1, 0, 1},
    '{0, 0, 1, 0, 1, 1}
  };

  typedef int p_t   [RK][64];
  typedef int msg_t [RNE][RM];
  typedef int y_t   [RK][2];
  typedef int cb_t  [96];
  typedef int dm_t  [RK][RK];
  typedef int sym_a [RJ];

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // user on slot s of resource k
  function automatic int r_user(input int k, input int s);
    int n;
    n = 0;
    for (int j = 0; j < RJ; j++)
      if (F[k][j]) begin
        if (n == s) return j;
        n++;
      end
    return -1;
  endfunction

  // d-th resource (ascending) of user j
  function automatic int r_res(input int j, input int d);
    int n;
    n = 0;
    for (int k = 0; k < RK; k++)
      if (F[k][j]) begin
        if (n == d) return k;
        n++;
      end
    return -1;
  endfunction

  function automatic int r_edge(input int j, input int d);
    int k;
    k = r_res(j, d);
    for (int s = 0; s < RDF; s++)
      if (r_user(k, s) == j) return k * RDF + s;
    return -1;
  endfunction

  function automatic int cb_addr_of(input int j, input int m, input int d, input int ri);
    return ((j * RM + m) * 2 + d) * 2 + ri;
  endfunction

  // Test codebook: codeword m of user j in dimension d is a point of radius
  // 30 at angle 90deg*m + 23deg*j + 41deg*d (4-point rotated constellations,
  // different for every user so that superpositions rarely coincide).
  function automatic int cb_word(input int j, input int m, input int d, input int ri);
    real a;
    a = 3.14159265358979 / 180.0 * (90.0 * m + 23.0 * j + 41.0 * d);
    return (ri == 0) ? int'($rtoi(30.0 * $cos(a) + ((30.0 * $cos(a) >= 0) ? 0.5 : -0.5)))
                     : int'($rtoi(30.0 * $sin(a) + ((30.0 * $sin(a) >= 0) ? 0.5 : -0.5)));
  endfunction

  function automatic void make_cb(output cb_t cb);
    for (int j = 0; j < RJ; j++)
      for (int m = 0; m < RM; m++)
        for (int d = 0; d < 2; d++)
          for (int ri = 0; ri < 2; ri++)
            cb[cb_addr_of(j, m, d, ri)] = cb_word(j, m, d, ri);
  endfunction

  // noise reduction: y' = round(Dinv * y), saturated to 8 bits
  function automatic void ref_nr(input y_t y, input dm_t dinv, output y_t yo);
    for (int i = 0; i < RK; i++)
      for (int ri = 0; ri < 2; ri++) begin
        longint r;
        longint acc;
        acc = 0;
        for (int k = 0; k < RK; k++) acc += longint'(dinv[i][k]) * y[k][ri];
        r = (acc + 2048) >>> 12;
        if (r > 127) r = 127;
        if (r < -128) r = -128;
        yo[i][ri] = int'(r);
      end
  endfunction

  // initial log-probabilities
  function automatic void ref_init(input y_t y, input cb_t cb, input int inv_n0,
                                   input int mode, output p_t p);
    for (int k = 0; k < RK; k++)
      for (int c = 0; c < 64; c++) begin
        int ms [3];
        int dr, di;
        longint mag, sc;
        ms[0] = c / 16; ms[1] = (c / 4) % 4; ms[2] = c % 4;
        dr = y[k][0]; di = y[k][1];
        for (int s = 0; s < RDF; s++) begin
          int d;
          int j;
          j = r_user(k, s);
          d = (r_res(j, 0) == k) ? 0 : 1;
          dr -= cb[cb_addr_of(j, ms[s], d, 0)];
          di -= cb[cb_addr_of(j, ms[s], d, 1)];
        end
        if (mode == 0 || mode == 2) mag = longint'(dr) * dr + longint'(di) * di;
        else                        begin
          longint abs_r, abs_i;
          abs_r = longint'(dr);
          abs_i = longint'(di);
          if (abs_r < 0) abs_r = -abs_r;
          if (abs_i < 0) abs_i = -abs_i;
          mag = abs_r + abs_i;
        end
        if (mode == 0 || mode == 1) sc = (mag * inv_n0) >>> 8;
        else                        sc = mag;
        p[k][c] = (sc > 32768) ? -32768 : int'(-sc);
      end
  endfunction

  // resource-node message for edge slot s (the other slots' messages la, lb)
  function automatic void ref_rn(input int s, input int pk [64], input int la [RM],
                                 input int lb [RM], output int r [RM]);
    for (int m = 0; m < RM; m++) begin
      int best;
      best = -2147483647;
      for (int ma = 0; ma < RM; ma++)
        for (int mb = 0; mb < RM; mb++) begin
          int ms [3];
          int v;
          int o;
          o = 0;
          for (int t = 0; t < 3; t++)
            if (t == s) ms[t] = m;
            else begin
              ms[t] = (o == 0) ? ma : mb;
              o++;
            end
          v = sat16(longint'(pk[ms[0]*16 + ms[1]*4 + ms[2]]) + longint'(la[ma]) + longint'(lb[mb]));
          if (v > best) best = v;
        end
      r[m] = best;
    end
  endfunction

  // stability / self-adaption of one belief; returns adjusted value
  function automatic int ref_conv(input int v, input int vt, input bit first,
                                  input bit adapt, input int ash, input int bsh,
                                  input int esh, output bit stable,
                                  output bit up, output bit down);
    int e;
    int d;
    bit ge, le, inb;
    d = v - vt;
    e = (vt < 0 ? -vt : vt) >>> esh;
    stable = 0; up = 0; down = 0;
    if (vt == 0)     begin ge = 0;        le = 0;        inb = (d == 0); end
    else if (vt > 0) begin ge = (d >= e); le = (d <= -e); inb = (d <= e && d >= -e); end
    else             begin ge = (d <= -e); le = (d >= e); inb = (d <= e && d >= -e); end
    if (first) return v;
    if (!adapt) begin
      stable = inb;
      return v;
    end
    if (ge) begin up = 1; begin longint lv; lv = longint'(v); return sat16(lv + (lv >>> ash)); end end
    if (le) begin down = 1; begin longint lv; lv = longint'(v); return sat16(lv - (lv >>> bsh)); end end
    stable = (vt != 0) || inb;
    return v;
  endfunction

  function automatic int ref_judge(input int r0 [RM], input int r1 [RM]);
    int best, bi;
    best = sat16(longint'(r0[0]) + longint'(r1[0]));
    bi = 0;
    for (int m = 1; m < RM; m++)
      if (sat16(longint'(r0[m]) + longint'(r1[m])) > best) begin
        best = sat16(longint'(r0[m]) + longint'(r1[m]));
        bi = m;
      end
    return bi;
  endfunction

  // Whole decoder. Returns symbols, iterations run, early flag and the
  // number of beliefs scaled up / down by self-adaption.
  function automatic void ref_decode(input y_t y, input cb_t cb, input dm_t dinv,
      input int inv_n0, input int mode, input int imax_in, input bit et,
      input bit adapt, input int ash, input int bsh, input int esh,
      output sym_a sym, output int iters, output bit early,
      output int n_up, output int n_down);
    y_t   yn;
    p_t   p;
    msg_t lm, rm, rnew;
    int   imax;
    bit   all_st;
    imax = (imax_in == 0) ? 1 : imax_in;
    ref_nr(y, dinv, yn);
    ref_init(yn, cb, inv_n0, mode, p);
    foreach (lm[e, m]) begin lm[e][m] = 0; rm[e][m] = 0; end
    n_up = 0; n_down = 0; early = 0; iters = 0;
    for (int t = 1; t <= imax; t++) begin
      for (int k = 0; k < RK; k++)
        for (int s = 0; s < RDF; s++) begin
          int la [RM], lb [RM], r [RM];
          int sb;
          int sa;
          sa = (s == 0) ? 1 : 0;
          sb = (s == 2) ? 1 : 2;
          la = lm[k*RDF + sa];
          lb = lm[k*RDF + sb];
          ref_rn(s, p[k], la, lb, r);
          rnew[k*RDF + s] = r;
        end
      all_st = 1;
      for (int e = 0; e < RNE; e++)
        for (int m = 0; m < RM; m++) begin
          bit st, u, dn;
          rnew[e][m] = ref_conv(rnew[e][m], rm[e][m], t == 1, adapt, ash, bsh, esh, st, u, dn);
          all_st &= st;
          n_up += u;
          n_down += dn;
        end
      rm = rnew;
      iters = t;
      if (t == imax) break;
      if (et && all_st) begin early = 1; break; end
      // layer-node update: swap between the user's two edges, normalize
      for (int j = 0; j < RJ; j++)
        for (int d = 0; d < 2; d++) begin
          int dst;
          int src;
          int mx;
          src = r_edge(j, 1 - d);
          dst = r_edge(j, d);
          mx = rm[src][0];
          for (int m = 1; m < RM; m++) if (rm[src][m] > mx) mx = rm[src][m];
          for (int m = 0; m < RM; m++) lm[dst][m] = sat16(longint'(rm[src][m]) - longint'(mx));
        end
    end
    for (int j = 0; j < RJ; j++) begin
      int r0 [RM], r1 [RM];
      r0 = rm[r_edge(j, 0)];
      r1 = rm[r_edge(j, 1)];
      sym[j] = ref_judge(r0, r1);
    end
  endfunction

endpackage
