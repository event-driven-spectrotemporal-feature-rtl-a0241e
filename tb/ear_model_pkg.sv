// ear_model_pkg: bit-exact reference model of one ear, written from the
// model equations for the end-to-end testbenches. It keeps its own copy of
// all coefficients and states as 32-bit integers in Q7.24 and processes one
// audio sample at a time: for each channel, from the basal end, DOHC pole
// radius, CAR section, IHC; then lateral inhibition and the LIF neurons of
// every channel; then the AGC stages that are due on this sample.
package ear_model_pkg;
  import tb_fx_pkg::*;

  localparam int ONE = 1 << 24;

  class ear_model;
    int n;
    int n_act;   // active channels
    int nlif;
    // coefficients
    int a0[], c0[], r1[], h[], g[], drz[];
    // shared parameters
    bit fac_en;
    int scale, offset, c_ac, c_in, c_out, c_lpf, mix, li_k, c_lif, v_reset;
    int eps[4];
    int vth[];
    // states
    int z1[], z2[], bmy[], bmv[], ac[], cap[], l1[], l2[];
    int lif[][];
    int acc[4][], inp[4][], st[4][];
    int phase;
    // outputs of the last sample
    int y_out[], ihc_out[];
    bit spk_out[][];
    int n_due;

    function new(int n_ch, int n_lif);
      n = n_ch; n_act = n_ch; nlif = n_lif;
      a0 = new[n]; c0 = new[n]; r1 = new[n]; h = new[n]; g = new[n]; drz = new[n];
      z1 = new[n]; z2 = new[n]; bmy = new[n]; bmv = new[n];
      ac = new[n]; cap = new[n]; l1 = new[n]; l2 = new[n];
      y_out = new[n]; ihc_out = new[n];
      vth = new[nlif];
      lif = new[n]; spk_out = new[n];
      for (int c = 0; c < n; c++) begin
        lif[c] = new[nlif]; spk_out[c] = new[nlif];
        z1[c] = 0; z2[c] = 0; bmy[c] = 0; bmv[c] = 0; ac[c] = 0; cap[c] = ONE; l1[c] = 0; l2[c] = 0;
        foreach (lif[c][j]) lif[c][j] = 0;
      end
      for (int k = 0; k < 4; k++) begin
        acc[k] = new[n]; inp[k] = new[n]; st[k] = new[n];
        for (int c = 0; c < n; c++) begin acc[k][c] = 0; inp[k][c] = 0; st[k][c] = 0; end
      end
      phase = 0;
    endfunction

    // Small CAR filter bank: pole frequencies spaced geometrically from
    // f_hi down to f_lo, damping between zeta 0.35 (r1) and 0.1 (r1 + d_rz),
    // h = c0 and g chosen for unity low-frequency gain at mid damping.
    function void design_bank(real fs, real f_hi, real f_lo);
      for (int c = 0; c < n; c++) begin
        real f, th, ra0, rc0, rr1, rdrz, rh, rr, rg;
        f = f_hi * $pow(f_lo / f_hi, real'(c) / real'((n > 1) ? n - 1 : 1));
        th = 2.0 * 3.14159265 * f / fs;
        ra0 = $cos(th); rc0 = $sin(th);
        rr1 = 1.0 - 0.35 * th; rdrz = 0.25 * th; rh = rc0;
        rr = rr1 + 0.5 * rdrz;
        rg = (1.0 - 2.0 * ra0 * rr + rr * rr) / (1.0 - (2.0 * ra0 - rh * rc0) * rr + rr * rr);
        a0[c] = to_fx(ra0); c0[c] = to_fx(rc0); r1[c] = to_fx(rr1);
        drz[c] = to_fx(rdrz); h[c] = to_fx(rh); g[c] = to_fx(rg);
      end
    endfunction

    function void step(int x);
      int y_prev;
      y_prev = 0;
      for (int c = 0; c < n_act; c++) begin
        int u, nlf, r, xin, rot1, rot2, z1n, z2n, y, hp, z, zz2, zz3, cond, q, cap_n, l1n, l2n;
        // DOHC
        u = m(scale, bmv[c]) + offset;
        nlf = dv(ONE, ONE + m(u, u));
        r = fac_en ? r1[c] + m(m(drz[c], ONE - st[0][c]), nlf) : r1[c];
        // CAR
        xin = (c == 0) ? x : y_prev;
        rot1 = m(a0[c], z1[c]) - m(c0[c], z2[c]);
        rot2 = m(c0[c], z1[c]) + m(a0[c], z2[c]);
        z1n = m(r, rot1) + xin;
        z2n = m(r, rot2);
        y = m(g[c], xin + m(h[c], z2n));
        bmv[c] = y - bmy[c];
        bmy[c] = y; z1[c] = z1n; z2[c] = z2n;
        y_out[c] = y; y_prev = y;
        // IHC
        hp = y - ac[c];
        ac[c] = ac[c] + m(c_ac, hp);
        z = hp + $rtoi(0.13 * 16777216.0);
        if (z < 0) z = 0;
        zz2 = m(z, z); zz3 = m(zz2, z);
        cond = dv(zz3, zz3 + zz2 + $rtoi(0.1 * 16777216.0));
        q = m(cond, cap[c]);
        cap_n = cap[c] + m(c_in, ONE - cap[c]) - m(c_out, q);
        l1n = l1[c] + m(c_lpf, q - l1[c]);
        l2n = l2[c] + m(c_lpf, l1n - l2[c]);
        cap[c] = cap_n; l1[c] = l1n; l2[c] = l2n;
        ihc_out[c] = l2n;
        acc[0][c] += l2n;
      end
      // lateral inhibition and LIF
      for (int c = 0; c < n_act; c++) begin
        int xl, xr, d;
        xl = (c > 0) ? ihc_out[c-1] : 0;
        xr = (c < n_act - 1) ? ihc_out[c+1] : 0;
        d = ihc_out[c] - m(li_k, (xl + xr) >>> 1);
        if (d < 0) d = 0;
        for (int j = 0; j < nlif; j++) begin
          int v1;
          v1 = lif[c][j] + m(c_lif, d - lif[c][j]);
          spk_out[c][j] = v1 > vth[j];
          lif[c][j] = spk_out[c][j] ? v_reset : v1;
        end
      end
      agc_update();
    endfunction

    function void agc_update();
      int tmp[];
      tmp = new[n];
      phase = (phase + 1) % 64;
      n_due = 0;
      if (phase % 8 == 0) n_due = 1;
      if (phase % 16 == 0) n_due = 2;
      if (phase % 32 == 0) n_due = 3;
      if (phase == 0) n_due = 4;
      for (int k = 0; k < n_due; k++)
        for (int c = 0; c < n_act; c++) begin
          inp[k][c] = (k == 0) ? (acc[k][c] >>> 3) : (acc[k][c] >>> 1);
          acc[k][c] = 0;
          if (k < 3) acc[k+1][c] += inp[k][c];
        end
      for (int k = n_due - 1; k >= 0; k--) begin
        for (int c = 0; c < n_act; c++) begin
          int xm;
          xm = inp[k][c];
          if (k < 3) xm += m(mix, st[k+1][c]);
          tmp[c] = st[k][c] + m(eps[k], xm - st[k][c]);
        end
        for (int c = 0; c < n_act; c++) begin
          int tl, tr;
          tl = (c == 0) ? tmp[c] : tmp[c-1];
          tr = (c == n_act - 1) ? tmp[c] : tmp[c+1];
          st[k][c] = (tl >>> 2) + (tmp[c] >>> 1) + (tr >>> 2);
        end
      end
    endfunction
  endclass
endpackage
