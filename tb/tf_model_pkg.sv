// tf_model_pkg - bit-exact reference model of the fitter arithmetic for the
// testbenches.
//
// Written independently of the RTL in plain 64-bit integer arithmetic: each
// function restates a formula of the fitter (linear fit, phi and z
// transformation) with the fixed-point steps the RTL documents (shift right,
// saturate to 18 bits). The fixed-point constants are repeated here as
// literals on purpose, so a wrong constant in the RTL package shows up.
package tf_model_pkg;

  localparam longint MAXV = 131071;
  localparam longint MINV = -131072;

  function automatic longint sat18(input longint v);
    if (v > MAXV) return MAXV;
    if (v < MINV) return MINV;
    return v;
  endfunction

  // y = sum a_j (x_j - xbar_j) + mean, in units of 2^-12 for the products
  function automatic longint m_lin(input longint x[], input longint xbar[],
                                   input longint a[], input longint mean);
    longint acc;
    acc = mean * 4096;
    foreach (x[j]) acc += a[j] * (x[j] - xbar[j]);
    return sat18(acc >>> 12);
  endfunction

  // phi' = phi + (R-R')c + (Rc)^3/6 + [2S] pitch*off*(R_ex - R)/R^2
  function automatic longint m_phi(input longint r, input longint phi, input longint z,
                                   input longint c, input longint tn, input longint rid,
                                   input longint refr, input longint refz, input bit en,
                                   input longint soff, input longint invr2, input longint pitch);
    longint x1, s1, dz, m, x2, dr, x3, g, t, d;
    x1 = sat18((r * c) >>> 16);
    s1 = sat18(((r - rid) * c) >>> 16);
    dz = sat18(((z - refz) * tn) >>> 12);
    m  = soff * pitch;
    x2 = sat18((x1 * x1) >>> 15);
    dr = sat18(refr + dz - r);
    x3 = sat18((x2 * x1) >>> 15);
    g  = sat18((dr * invr2) >>> 12);
    t  = sat18((x3 * 43691) >>> 18);
    d  = en ? sat18((m * g) >>> 25) : 0;
    return sat18(phi + s1 + t + d);
  endfunction

  // z' = z - cot (R - R') - cot R (Rc)^2 / 6
  function automatic longint m_z(input longint r, input longint z, input longint c,
                                 input longint ct, input longint rid);
    longint x1, a, x2, q, q6, b;
    x1 = sat18((r * c) >>> 16);
    a  = sat18(((r - rid) * ct) >>> 12);
    x2 = sat18((x1 * x1) >>> 15);
    q  = sat18((r * x2) >>> 15);
    q6 = sat18((q * 43691) >>> 18);
    b  = sat18((q6 * ct) >>> 12);
    return sat18(z - a - b);
  endfunction

  // signed random value in [-2^(bits-1), 2^(bits-1))
  function automatic longint srand(input int bits);
    longint u;
    u = longint'($urandom) & ((longint'(1) << bits) - 1);
    return u - (longint'(1) << (bits - 1));
  endfunction

endpackage
