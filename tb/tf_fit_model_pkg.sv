// tf_fit_model_pkg - reference model of a whole track fit, for the fitter
// testbenches.
//
// Holds a copy of every constant table, fills it with random constants
// (gen_tables), and predicts the output of one track (fit_track): address,
// pre-estimates, reference hit, phi' and z' of each slot, pT switch and the
// two final fits, all with the arithmetic of tf_model_pkg. Constants of the
// missing slot in a five-hit set are zero, as a trained set would have.
package tf_fit_model_pkg;
  import tf_model_pkg::*;

  localparam int NSET = 98, NREG = 14, PITCH = 590, THRESH = 4782;

  longint kc [NSET][13];
  longint kt [NSET][25];
  longint kk [NSET][25];
  longint rid[NSET][6];
  longint ft [2*NSET][44];
  longint fz [NSET][44];
  longint ir [16];

  typedef struct {
    bit     ok;
    int     set;
    bit     hi;
    bit     corr;        // strip correction applied to some hit
    int     nmiss;
    longint yt [6];
    longint yz [6];
  } pred_t;

  typedef struct {
    bit     valid, two_s;
    int     ring;
    longint soff, r, phi, z;
  } mhit_t;

  function automatic void gen_tables();
    for (int s = 0; s < NSET; s++) begin
      int miss;
      miss = s / NREG - 1;    // -1: six-hit set
      for (int j = 0; j < 6; j++) begin
        kc[s][j]      = (j == miss) ? 0 : srand(9);
        kc[s][6 + j]  = srand(16);
        kt[s][j]      = (j == miss) ? 0 : srand(8);
        kt[s][6 + j]  = (j == miss) ? 0 : srand(8);
        kt[s][12 + j] = srand(16);
        kt[s][18 + j] = 5000 + $urandom_range(23000);
        kk[s][j]      = (j == miss) ? 0 : srand(8);
        kk[s][6 + j]  = (j == miss) ? 0 : srand(8);
        kk[s][12 + j] = srand(16);
        kk[s][18 + j] = 5000 + $urandom_range(23000);
        rid[s][j]     = 5000 + $urandom_range(23000);
      end
      kc[s][12] = srand(13);
      kt[s][24] = srand(14);
      kk[s][24] = srand(14);
      for (int h = 0; h < 2; h++)
        for (int i = 0; i < 44; i++)
          ft[2*s + h][i] = (i < 36) ? ((i % 6 == miss) ? 0 : srand(12)) : srand(16);
      for (int i = 0; i < 44; i++)
        fz[s][i] = (i < 36) ? ((i % 6 == miss) ? 0 : srand(12)) : srand(16);
    end
    for (int g = 0; g < 16; g++) ir[g] = $urandom_range(80000);
  endfunction

  function automatic pred_t fit_track(input int region, input mhit_t hin [6]);
    pred_t  p;
    mhit_t  h [6];
    longint c, tn, ct, refr, refz;
    bit     refok;
    longint x[], xb[], a[], xr[], xbr[], ar[];
    longint php [6], zp [6];
    int     miss;

    p.nmiss = 0; miss = -1; p.corr = 0;
    for (int j = 0; j < 6; j++) begin
      h[j] = hin[j];
      if (!h[j].valid) begin
        p.nmiss++; miss = j;
        h[j].two_s = 0; h[j].ring = 0; h[j].soff = 0; h[j].r = 0; h[j].phi = 0; h[j].z = 0;
      end
    end
    p.ok  = (p.nmiss <= 1) && (region < NREG);
    p.set = region + NREG * (miss + 1);
    if (!p.ok) return p;

    // pre-estimates
    x = new[6]; xb = new[6]; a = new[6];
    for (int j = 0; j < 6; j++) begin x[j] = h[j].phi; xb[j] = kc[p.set][6+j]; a[j] = kc[p.set][j]; end
    c = m_lin(x, xb, a, kc[p.set][12]);
    xr = new[12]; xbr = new[12]; ar = new[12];
    for (int j = 0; j < 6; j++) begin
      xr[j] = h[j].z; xr[6+j] = h[j].r;
      xbr[j] = kt[p.set][12+j]; xbr[6+j] = kt[p.set][18+j];
      ar[j] = kt[p.set][j];     ar[6+j] = kt[p.set][6+j];
    end
    tn = m_lin(xr, xbr, ar, kt[p.set][24]);
    for (int j = 0; j < 6; j++) begin
      xbr[j] = kk[p.set][12+j]; xbr[6+j] = kk[p.set][18+j];
      ar[j] = kk[p.set][j];     ar[6+j] = kk[p.set][6+j];
    end
    ct = m_lin(xr, xbr, ar, kk[p.set][24]);

    // reference hit: outermost valid non-2S hit
    refok = 0; refr = 0; refz = 0;
    for (int j = 5; j >= 0; j--)
      if (!refok && h[j].valid && !h[j].two_s) begin refok = 1; refr = h[j].r; refz = h[j].z; end

    for (int j = 0; j < 6; j++) begin
      bit en;
      en = h[j].valid && h[j].two_s && refok;
      if (en) p.corr = 1;
      php[j] = m_phi(h[j].r, h[j].phi, h[j].z, c, tn, rid[p.set][j], refr, refz, en,
                     h[j].soff, ir[h[j].ring], PITCH);
      zp[j]  = m_z(h[j].r, h[j].z, c, ct, rid[p.set][j]);
    end

    p.hi = ((c < 0) ? -c : c) < THRESH;

    for (int i = 0; i < 6; i++) begin
      longint mt, mz;
      for (int j = 0; j < 6; j++) begin
        x[j] = php[j]; xb[j] = ft[2*p.set + p.hi][36+j]; a[j] = ft[2*p.set + p.hi][6*i+j];
      end
      mt = (i == 0) ? ft[2*p.set + p.hi][42] : (i == 1) ? ft[2*p.set + p.hi][43] : 0;
      p.yt[i] = m_lin(x, xb, a, mt);
      for (int j = 0; j < 6; j++) begin
        x[j] = zp[j]; xb[j] = fz[p.set][36+j]; a[j] = fz[p.set][6*i+j];
      end
      mz = (i == 0) ? fz[p.set][42] : (i == 1) ? fz[p.set][43] : 0;
      p.yz[i] = m_lin(x, xb, a, mz);
    end
    return p;
  endfunction

  // a random track: mostly six hits, some with one or two missing, a few
  // with an out-of-range region
  function automatic void rand_track(output int region, output mhit_t h [6]);
    int kind, m1, m2;
    region = ($urandom_range(49) == 0) ? 14 + $urandom_range(1) : $urandom_range(13);
    kind = $urandom_range(19);
    m1 = (kind >= 13) ? $urandom_range(5) : -1;
    m2 = (kind >= 18) ? $urandom_range(5) : -1;
    for (int j = 0; j < 6; j++) begin
      h[j].valid = (j != m1) && (j != m2);
      h[j].two_s = ($urandom_range(2) == 0);
      h[j].ring  = $urandom_range(15);
      h[j].soff  = srand(11);
      h[j].r     = 5000 + $urandom_range(23000);
      h[j].phi   = srand(16);
      h[j].z     = srand(17);
    end
  endfunction

endpackage
