// ccd_ref_pkg: golden model of the LLDS + CNN network for the testbenches.
//
// Computes a whole frame layer by layer with plain loops over complete
// arrays (no streaming, no phases), using the weight address map and the
// fixed-point rules documented in ccd_pkg: products of 12-bit activations
// and Q0.7 weights, bias shifted left by BIAS_SHIFT, result shifted right by
// W_FRAC, ReLU where the layer has one, saturation to 12 bits. It also
// holds the weight images the testbenches load into the design.
package ccd_ref_pkg;
  import ccd_pkg::*;

  int wl1 [LLDS1_DEPTH];
  int wl2 [LLDS2_DEPTH];
  int wc1 [CONV1_DEPTH];
  int wc2 [CONV2_DEPTH];
  int wd  [DENSE_DEPTH];
  int wo  [OUT_DEPTH];

  // intermediate results of the last reference run
  int m   [4][FRAME_LEN];
  int c   [2][CLEN];
  int a1  [C1_NF][C1_LEN];
  int a2  [C2_NF][C2_LEN];
  int hh  [D_NH];
  longint lacc [NCLS];
  int lg  [NCLS];
  int cls;

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int q12(longint acc, bit relu);
    longint s;
    s = acc >>> W_FRAC;
    if (relu && s < 0) s = 0;
    if (s > 2047) s = 2047;
    if (s < -2048) s = -2048;
    return int'(s);
  endfunction

  function automatic longint b(int w);
    return longint'(w) * (longint'(1) << BIAS_SHIFT);
  endfunction

  // Weight image word k of layer ly.
  function automatic int wget(layer_e ly, int k);
    case (ly)
      LY_LLDS1: return wl1[k];
      LY_LLDS2: return wl2[k];
      LY_CONV1: return wc1[k];
      LY_CONV2: return wc2[k];
      LY_DENSE: return wd[k];
      default:  return wo[k];
    endcase
  endfunction

  // Random weights with per-layer ranges that keep activations in range.
  function automatic void random_weights();
    foreach (wl1[k]) wl1[k] = rnd(-40, 40);
    foreach (wl2[k]) wl2[k] = rnd(-40, 40);
    foreach (wc1[k]) wc1[k] = rnd(-24, 24);
    foreach (wc2[k]) wc2[k] = rnd(-6, 6);
    foreach (wd[k])  wd[k]  = rnd(-12, 12);
    foreach (wo[k])  wo[k]  = rnd(-127, 127);
    for (int k = 0; k < NCLS; k++) wo[k*(D_NH+1) + D_NH] = 0;
  endfunction

  // Output layer that raises HT1 when hidden unit j exceeds 16*thr (about),
  // and CC-free otherwise; the other classes are held far below. Random
  // weights give a near-constant decision, this makes the test see both.
  function automatic void threshold_output(int j, int thr);
    foreach (wo[k]) wo[k] = 0;
    wo[0*(D_NH+1) + D_NH] = thr;
    wo[1*(D_NH+1) + j]    = 127;
    for (int k = 2; k < NCLS; k++) wo[k*(D_NH+1) + D_NH] = -128;
  endfunction

  function automatic void ref_llds1(const ref int fi[FRAME_LEN], const ref int fq[FRAME_LEN]);
    for (int n = 0; n < FRAME_LEN; n++)
      for (int br = 0; br < 2; br++) begin
        longint a5, a3;
        a5 = b(wl1[br*10 + 5]);
        a3 = b(wl1[br*10 + 9]);
        for (int k = 0; k < 5; k++) begin
          int p; p = n - 2 + k;
          if (p >= 0 && p < FRAME_LEN) a5 += longint'(br == 0 ? fi[p] : fq[p]) * wl1[br*10 + k];
        end
        for (int k = 0; k < 3; k++) begin
          int p; p = n - 1 + k;
          if (p >= 0 && p < FRAME_LEN) a3 += longint'(br == 0 ? fi[p] : fq[p]) * wl1[br*10 + 6 + k];
        end
        m[2*br][n]   = q12(a5, 1);
        m[2*br+1][n] = q12(a3, 1);
      end
  endfunction

  function automatic void ref_llds2();
    for (int j = 0; j < CLEN; j++)
      for (int br = 0; br < 2; br++) begin
        longint a;
        a = b(wl2[br*11 + 10]);
        for (int k = 0; k < CF; k++)
          a += longint'(m[2*br][CF*j + k]) * wl2[br*11 + k] + longint'(m[2*br+1][CF*j + k]) * wl2[br*11 + 5 + k];
        c[br][j] = q12(a, 0);
      end
  endfunction

  function automatic void ref_conv1();
    for (int f = 0; f < C1_NF; f++)
      for (int p = 0; p < C1_LEN; p++) begin
        longint a;
        a = b(wc1[f*17 + 16]);
        for (int r = 0; r < 2; r++)
          for (int t = 0; t < C1_KW; t++) a += longint'(c[r][p+t]) * wc1[f*17 + r*8 + t];
        a1[f][p] = q12(a, 1);
      end
  endfunction

  function automatic void ref_conv2();
    for (int f = 0; f < C2_NF; f++)
      for (int p = 0; p < C2_LEN; p++) begin
        longint a;
        a = b(wc2[f*271 + 270]);
        for (int ch = 0; ch < C1_NF; ch++)
          for (int t = 0; t < C2_KW; t++) a += longint'(a1[ch][p+t]) * wc2[f*271 + ch*6 + t];
        a2[f][p] = q12(a, 1);
      end
  endfunction

  function automatic void ref_dense();
    for (int n = 0; n < D_NH; n++) begin
      longint a;
      a = b(wd[n*1045 + 1044]);
      for (int p = 0; p < C2_LEN; p++)
        for (int f = 0; f < C2_NF; f++) a += longint'(a2[f][p]) * wd[n*1045 + p*9 + f];
      hh[n] = q12(a, 1);
    end
  endfunction

  function automatic void ref_out();
    cls = 0;
    for (int k = 0; k < NCLS; k++) begin
      lacc[k] = b(wo[k*33 + 32]);
      for (int j = 0; j < D_NH; j++) lacc[k] += longint'(hh[j]) * wo[k*33 + j];
      lg[k] = q12(lacc[k], 0);
      if (lacc[k] > lacc[cls]) cls = k;
    end
  endfunction

  function automatic void ref_frame(const ref int fi[FRAME_LEN], const ref int fq[FRAME_LEN]);
    ref_llds1(fi, fq);
    ref_llds2();
    ref_conv1();
    ref_conv2();
    ref_dense();
    ref_out();
  endfunction

  // Test frames: a few shapes so that the class decision varies.
  function automatic void make_frame(int kind, ref int fi[FRAME_LEN], ref int fq[FRAME_LEN]);
    int amp;
    amp = 300 + 250 * (kind % 7);
    for (int n = 0; n < FRAME_LEN; n++) begin
      case (kind % 4)
        0: begin fi[n] = rnd(-amp, amp); fq[n] = rnd(-amp, amp); end
        1: begin fi[n] = ((n / (4 + kind % 5)) % 2) ? amp : -amp; fq[n] = rnd(-amp/4, amp/4); end
        2: begin fi[n] = (n % 32) * amp / 32; fq[n] = -fi[n] + rnd(-50, 50); end
        default: begin fi[n] = (n < 160) ? rnd(-amp, amp) : rnd(-amp/8, amp/8); fq[n] = rnd(-amp, amp) / 2; end
      endcase
    end
  endfunction
endpackage
