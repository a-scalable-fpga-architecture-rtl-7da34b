// gari_tb_pkg: synthetic GARI code generator and bit-exact reference decoder
// for the decoder testbenches.
//
// The generator builds a random code that respects the structure the
// hardware relies on: every D_X/D_Z check has at most one variable per tile;
// variable (t, a) takes part in the checks c with (c + 3t) mod P == a, so two
// checks sharing a variable are P >= 10 issue slots apart (more than the
// serial pipeline); every used ebar variable owns one U (or V) check, placed
// round-robin on the U,V tiles; every e_Y variable joins a lane of a U check
// to a lane of a V check. A random error pattern sets the syndromes and
// biases the priors, with some priors flipped to make decoding non-trivial.
//
// The reference decoder runs the same schedule on plain integers: layered
// normalized min-sum over D_X, then U, then D_Z (checked for convergence),
// then V, and so on, with the same saturations (10-bit totals, 8-bit
// messages, alpha = 3/4). With uv_bypass set the U,V steps are skipped,
// which matches a D_X,D_Z unit whose totals are looped back unchanged.
package gari_tb_pkg;

  typedef struct {
    int target, tile, lane, addr;
    longint data;
  } ld_rec_t;

  class gari_code_model;
    // sizes
    int NT, VXD, VZD, NCX, NCZ, NU, SLOTS;
    int lanes[];
    int lbase[];
    // D_X (m=0) / D_Z (m=1) checks: per check per tile, address or -1
    int chk[2][][];
    bit first[2][][], last[2][][];
    bit used[2][][];           // [m][t][a]
    int cval[2][][];           // prior LLR of ebar var
    bit err[2][][];            // true error
    bit syn[2][];
    // UV checks, index half*SLOTS/2+slot per tile: owner ebar var
    int uv_t[][], uv_a[][], uv_m[][];  // -1 if slot unused
    int var_k[2][][], var_s[2][][];    // UV tile / slot address of an ebar var
    int xz[][];                        // prior of e_X/e_Z
    int ylink_k[][][], ylink_l[][][], ylink_s[][][]; // opposite lane, -1 if none
    int yc[][][];                      // e_Y prior (one value per e_Y: stored on both ends)
    // model state
    int L[2][][];                      // totals
    int rdx[2][][];                    // D_X/D_Z check messages [m][c][t]
    int rb[][];                        // UV message to ebar [k][slot]
    int ym[][][];                      // message received on lane [k][l][slot]
    bit hd[][];                        // [t][a] for D_Z
    int n_ey;
    bit uv_bypass;                     // U,V steps leave the totals unchanged

    function new(int nt, int vxd, int vzd, int ncx, int ncz, int nu, int slots, int ln[]);
      NT = nt; VXD = vxd; VZD = vzd; NCX = ncx; NCZ = ncz; NU = nu; SLOTS = slots;
      lanes = ln;
      lbase = new[NU + 1];
      lbase[0] = 0;
      for (int k = 0; k < NU; k++) lbase[k+1] = lbase[k] + lanes[k];
    endfunction

    function int rnd(int lo, int hi);
      return lo + int'($urandom % (hi - lo + 1));
    endfunction

    function void build(int mask_pct, int ey_pct);
      int nc, d, p;
      int next_u[2];
      int vfree_k[$], vfree_l[$], vfree_s[$];
      for (int m = 0; m < 2; m++) begin
        nc = m ? NCZ : NCX; d = m ? VZD : VXD;
        p = nc / 3; if (p > d) p = d; if (p < 10) p = 10;
        chk[m] = new[nc]; first[m] = new[nc]; last[m] = new[nc];
        used[m] = new[NT]; cval[m] = new[NT]; err[m] = new[NT];
        var_k[m] = new[NT]; var_s[m] = new[NT]; L[m] = new[NT];
        for (int t = 0; t < NT; t++) begin
          used[m][t] = new[d]; cval[m][t] = new[d]; err[m][t] = new[d];
          var_k[m][t] = new[d]; var_s[m][t] = new[d]; L[m][t] = new[d];
        end
        for (int c = 0; c < nc; c++) begin
          int cnt = 0;
          chk[m][c] = new[NT]; first[m][c] = new[NT]; last[m][c] = new[NT];
          for (int t = 0; t < NT; t++) begin
            if (rnd(0, 99) < mask_pct || (t >= NT - 2 && cnt < 2)) begin
              chk[m][c][t] = (c + 3 * t) % p; cnt++;
            end else chk[m][c][t] = -1;
          end
        end
        // first / last touches
        for (int t = 0; t < NT; t++)
          for (int a = 0; a < d; a++) begin
            int fc = -1, lc = -1;
            for (int c = 0; c < nc; c++) if (chk[m][c][t] == a) begin
              if (fc < 0) fc = c; lc = c;
            end
            used[m][t][a] = (fc >= 0);
            for (int c = 0; c < nc; c++) if (chk[m][c][t] == a) begin
              first[m][c][t] = (c == fc); last[m][c][t] = (c == lc);
            end
          end
      end
      // UV slots
      uv_t = new[NU]; uv_a = new[NU]; uv_m = new[NU]; xz = new[NU];
      ylink_k = new[NU]; ylink_l = new[NU]; ylink_s = new[NU]; yc = new[NU];
      ym = new[NU]; rb = new[NU];
      for (int k = 0; k < NU; k++) begin
        uv_t[k] = new[SLOTS]; uv_a[k] = new[SLOTS]; uv_m[k] = new[SLOTS]; xz[k] = new[SLOTS];
        rb[k] = new[SLOTS];
        ylink_k[k] = new[lanes[k]]; ylink_l[k] = new[lanes[k]]; ylink_s[k] = new[lanes[k]];
        yc[k] = new[lanes[k]]; ym[k] = new[lanes[k]];
        for (int l = 0; l < lanes[k]; l++) begin
          ylink_k[k][l] = new[SLOTS]; ylink_l[k][l] = new[SLOTS]; ylink_s[k][l] = new[SLOTS];
          yc[k][l] = new[SLOTS]; ym[k][l] = new[SLOTS];
        end
        for (int s = 0; s < SLOTS; s++) begin
          uv_t[k][s] = -1;
          for (int l = 0; l < lanes[k]; l++) ylink_k[k][l][s] = -1;
        end
      end
      for (int m = 0; m < 2; m++) begin
        int d = m ? VZD : VXD;
        next_u[m] = 0;
        for (int t = 0; t < NT; t++)
          for (int a = 0; a < d; a++) if (used[m][t][a]) begin
            int k = next_u[m] % NU, s = m * (SLOTS / 2) + next_u[m] / NU;
            if (next_u[m] / NU >= SLOTS / 2) $fatal(1, "too many variables for the U,V tiles");
            next_u[m]++;
            var_k[m][t][a] = k; var_s[m][t][a] = s;
            uv_t[k][s] = t; uv_a[k][s] = a; uv_m[k][s] = m;
            xz[k][s] = rnd(8, 25);
          end
      end
      // e_Y variables: U lane slots joined to free V lane slots
      for (int k = 0; k < NU; k++)
        for (int s = SLOTS / 2; s < SLOTS; s++) if (uv_t[k][s] >= 0)
          for (int l = 0; l < lanes[k]; l++) begin
            vfree_k.push_back(k); vfree_l.push_back(l); vfree_s.push_back(s);
          end
      n_ey = 0;
      for (int k = 0; k < NU; k++)
        for (int s = 0; s < SLOTS / 2; s++) if (uv_t[k][s] >= 0)
          for (int l = 0; l < lanes[k]; l++)
            if (rnd(0, 99) < ey_pct && vfree_s.size() > 0) begin
              int i = rnd(0, vfree_s.size() - 1);
              int k2 = vfree_k[i], l2 = vfree_l[i], s2 = vfree_s[i];
              // keep the pools aligned: move last into i
              vfree_k[i] = vfree_k[vfree_k.size()-1]; void'(vfree_k.pop_back());
              vfree_l[i] = vfree_l[vfree_l.size()-1]; void'(vfree_l.pop_back());
              vfree_s[i] = vfree_s[vfree_s.size()-1]; void'(vfree_s.pop_back());
              ylink_k[k][l][s] = k2; ylink_l[k][l][s] = l2; ylink_s[k][l][s] = s2;
              ylink_k[k2][l2][s2] = k; ylink_l[k2][l2][s2] = l; ylink_s[k2][l2][s2] = s;
              yc[k][l][s] = rnd(8, 25); yc[k2][l2][s2] = yc[k][l][s];
              n_ey++;
            end
    endfunction

    // error pattern, priors and syndromes
    function void noise(int err_pct, int flip_pct);
      for (int m = 0; m < 2; m++) begin
        int d = m ? VZD : VXD, nc = m ? NCZ : NCX;
        for (int t = 0; t < NT; t++)
          for (int a = 0; a < d; a++) begin
            int mag = rnd(4, 20);
            bit e = used[m][t][a] && (rnd(0, 99) < err_pct);
            bit flip = rnd(0, 99) < flip_pct;
            err[m][t][a] = e;
            cval[m][t][a] = (e ^ flip) ? -mag : mag;
          end
        syn[m] = new[nc];
        for (int c = 0; c < nc; c++) begin
          bit s = 0;
          for (int t = 0; t < NT; t++) if (chk[m][c][t] >= 0) s ^= err[m][t][chk[m][c][t]];
          syn[m][c] = s;
        end
      end
    endfunction

    // ---------------- load list ----------------
    function automatic longint tagw(int dest, int addr);
      return (longint'(1) << 31) | (longint'(dest) << 23) | longint'(addr);
    endfunction

    function void loads(ref ld_rec_t q[$], input bit llr_only);
      ld_rec_t r;
      if (!llr_only) begin
        for (int m = 0; m < 2; m++) begin
          int nc = m ? NCZ : NCX;
          for (int c = 0; c < nc; c++)
            for (int t = 0; t < NT; t++) begin
              int a = chk[m][c][t];
              r = '{0, t, 0, m * NCX + c, 0};
              if (a >= 0) r.data = (1 << 11) | (int'(first[m][c][t]) << 10) | (int'(last[m][c][t]) << 9) | a;
              q.push_back(r);
              if (m == 1) begin
                r = '{2, t, 0, c, (a >= 0) ? ((1 << 9) | a) : 0};
                q.push_back(r);
              end
            end
        end
        for (int m = 0; m < 2; m++) begin
          int d = m ? VZD : VXD;
          for (int t = 0; t < NT; t++)
            for (int a = 0; a < d; a++) if (used[m][t][a]) begin
              r = '{1, t, 0, (m << 9) | a, tagw(var_k[m][t][a], var_s[m][t][a])};
              q.push_back(r);
            end
        end
        for (int k = 0; k < NU; k++)
          for (int s = 0; s < SLOTS; s++) if (uv_t[k][s] >= 0) begin
            r = '{7, k, 0, s, tagw(uv_t[k][s], (uv_m[k][s] << 9) | uv_a[k][s])};
            q.push_back(r);
            r = '{4, k, 0, s, xz[k][s] & 63};
            q.push_back(r);
            for (int l = 0; l < lanes[k]; l++) begin
              int k2 = ylink_k[k][l][s];
              r = '{6, k, l, s, (k2 >= 0) ? tagw(lbase[k2] + ylink_l[k][l][s], ylink_s[k][l][s]) : 0};
              q.push_back(r);
              r = '{5, k, l, s, yc[k][l][s] & 63};
              q.push_back(r);
            end
          end
      end
      for (int m = 0; m < 2; m++) begin
        int d = m ? VZD : VXD, nc = m ? NCZ : NCX;
        for (int t = 0; t < NT; t++)
          for (int a = 0; a < d; a++) if (used[m][t][a]) begin
            r = '{3, t, 0, m * VXD + a, cval[m][t][a] & 63};
            q.push_back(r);
          end
        for (int c = 0; c < nc; c++) begin
          r = '{8, 0, 0, m * NCX + c, syn[m][c]};
          q.push_back(r);
        end
      end
    endfunction

    // ---------------- reference decoder ----------------
    static function int satv(int x);
      if (x > 511) return 511;
      if (x < -511) return -511;
      return x;
    endfunction

    // normalized min-sum; qv: inputs, mk: mask; returns messages in rv
    static function void cnu(input int qv[], input bit mk[], input bit s, output int rv[]);
      int n = qv.size();
      int m1 = 511, m2 = 511, i1 = 0;
      bit par = s;
      int mag[];
      bit sg[];
      mag = new[n]; sg = new[n]; rv = new[n];
      for (int i = 0; i < n; i++) begin
        sg[i] = mk[i] && (qv[i] < 0);
        mag[i] = !mk[i] ? 511 : (qv[i] < 0 ? -qv[i] : qv[i]);
        par ^= sg[i];
        if (mag[i] < m1) begin m2 = m1; m1 = mag[i]; i1 = i; end
        else if (mag[i] < m2) m2 = mag[i];
      end
      for (int i = 0; i < n; i++) begin
        int mm = (i == i1) ? m2 : m1;
        int v = (mm * 3) >>> 2;
        if (v > 127) v = 127;
        rv[i] = (par ^ sg[i]) ? -v : v;
      end
    endfunction

    int stat_calib_reads, stat_masked;

    function void serial_step(int m, int it);
      int nc = m ? NCZ : NCX;
      for (int c = 0; c < nc; c++) begin
        int qv[]; bit mk[]; int rv[];
        qv = new[NT]; mk = new[NT];
        for (int t = 0; t < NT; t++) begin
          int a = chk[m][c][t];
          mk[t] = (a >= 0);
          if (a >= 0) begin
            int base = (it == 0 && first[m][c][t]) ? cval[m][t][a] : L[m][t][a];
            if (it == 0 && first[m][c][t]) stat_calib_reads++;
            qv[t] = satv(base - (it == 0 ? 0 : rdx[m][c][t]));
          end else begin qv[t] = 0; stat_masked++; end
        end
        cnu(qv, mk, syn[m][c], rv);
        for (int t = 0; t < NT; t++) begin
          int a = chk[m][c][t];
          rdx[m][c][t] = rv[t];
          if (a >= 0) begin
            L[m][t][a] = satv(qv[t] + rv[t]);
            if (m == 1 && last[m][c][t]) hd[t][a] = L[m][t][a] < 0;
          end
        end
      end
    endfunction

    // U (m=0) or V (m=1) checks
    function void uv_step(int m);
      // messages produced this step, applied afterwards (checks are independent)
      int newm[][][];
      newm = new[NU];
      for (int k = 0; k < NU; k++) begin
        newm[k] = new[lanes[k]];
        for (int l = 0; l < lanes[k]; l++) begin
          newm[k][l] = new[SLOTS];
          for (int s = 0; s < SLOTS; s++) newm[k][l][s] = 0;
        end
      end
      for (int k = 0; k < NU; k++)
        for (int s = m * (SLOTS / 2); s < (m + 1) * (SLOTS / 2); s++) if (uv_t[k][s] >= 0) begin
          int t = uv_t[k][s], a = uv_a[k][s];
          int n = lanes[k] + 2;
          int qv[]; bit mk[]; int rv[];
          qv = new[n]; mk = new[n];
          qv[0] = xz[k][s]; mk[0] = 1;
          for (int l = 0; l < lanes[k]; l++) begin
            mk[l+1] = ylink_k[k][l][s] >= 0;
            qv[l+1] = satv(yc[k][l][s] + ym[k][l][s]);
          end
          qv[n-1] = satv(L[m][t][a] - rb[k][s]); mk[n-1] = 1;
          cnu(qv, mk, 0, rv);
          rb[k][s] = rv[n-1];
          L[m][t][a] = satv(qv[n-1] + rv[n-1]);
          for (int l = 0; l < lanes[k]; l++) if (mk[l+1])
            newm[ylink_k[k][l][s]][ylink_l[k][l][s]][ylink_s[k][l][s]] = rv[l+1];
        end
      for (int k = 0; k < NU; k++)
        for (int l = 0; l < lanes[k]; l++)
          for (int s = (1 - m) * (SLOTS / 2); s < (2 - m) * (SLOTS / 2); s++)
            if (ylink_k[k][l][s] >= 0) ym[k][l][s] = newm[k][l][s];
    endfunction

    function bit parity_ok();
      for (int c = 0; c < NCZ; c++) begin
        bit s = syn[1][c];
        for (int t = 0; t < NT; t++) if (chk[1][c][t] >= 0) s ^= hd[t][chk[1][c][t]];
        if (s) return 0;
      end
      return 1;
    endfunction

    // returns iterations; conv set if converged
    function int decode(int max_iter, output bit conv);
      for (int m = 0; m < 2; m++) begin
        int nc = m ? NCZ : NCX;
        rdx[m] = new[nc];
        for (int c = 0; c < nc; c++) begin
          rdx[m][c] = new[NT];
          for (int t = 0; t < NT; t++) rdx[m][c][t] = 0;
        end
      end
      hd = new[NT];
      for (int t = 0; t < NT; t++) begin
        hd[t] = new[VZD];
        for (int a = 0; a < VZD; a++) hd[t][a] = 0;
      end
      for (int k = 0; k < NU; k++)
        for (int s = 0; s < SLOTS; s++) begin
          rb[k][s] = 0;
          for (int l = 0; l < lanes[k]; l++) ym[k][l][s] = 0;
        end
      stat_calib_reads = 0; stat_masked = 0;
      for (int it = 0; it < max_iter; it++) begin
        serial_step(0, it);
        if (!uv_bypass) uv_step(0);
        serial_step(1, it);
        if (parity_ok()) begin conv = 1; return it + 1; end
        if (!uv_bypass) uv_step(1);
      end
      conv = 0;
      return max_iter;
    endfunction
  endclass

endpackage
