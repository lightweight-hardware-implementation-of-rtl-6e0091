// mts_ref_pkg -- reference model for the MTS core testbenches.
//
// Computes the VVC integer transform matrices independently of the RTL: the sign and
// the magnitude index of each entry come from real-valued cos/sin of the definitions
// (DCT-II, DST-VII, DCT-VIII, Eq. 1-3 of the transform family), and the magnitude is
// looked up in the standard's tables of unique values. DCT-VIII is computed from its own
// cosine definition, not from the DST-VII relation the hardware uses.
// ref_sum() gives the raw 1-D inverse transform sum of one output; round_clip() the
// VVC rounding. avc4_1d() is the H.264 4x4 inverse transform, from its butterfly.
package mts_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic int dct_tab(int k);  // k = 0..64, value of 64*sqrt(2)*cos(k*pi/128)
    int o64 [32] = '{91,90,90,90,88,87,86,84,83,81,79,77,73,71,69,65,
                     62,59,56,52,48,44,41,37,33,28,24,20,15,11,7,2};
    int o32 [16] = '{90,90,88,85,82,78,73,67,61,54,46,38,31,22,13,4};
    int o16 [8]  = '{90,87,80,70,57,43,25,9};
    int o8  [4]  = '{89,75,50,18};
    case (k)
      0:  return 91;  // never used for i > 0
      16: return 83;
      32: return 64;
      48: return 36;
      64: return 0;
      default: ;
    endcase
    if (k & 1)        return o64[k >> 1];
    if ((k & 3) == 2) return o32[k >> 2];
    if ((k & 7) == 4) return o16[k >> 3];
    return o8[k >> 4];
  endfunction

  function automatic int sin_tab(int n, int k);  // k = 0..n
    int s4  [4]  = '{29,55,74,84};
    int s8  [8]  = '{17,32,46,60,71,78,85,86};
    int s16 [16] = '{8,17,25,33,40,48,55,62,68,73,77,81,85,87,88,88};
    int s32 [32] = '{4,9,13,17,21,26,30,34,38,42,46,50,53,56,60,63,
                     66,68,72,74,77,78,80,82,84,85,86,88,88,89,90,90};
    if (k == 0) return 0;
    if (n == 4)  return s4[k-1];
    if (n == 8)  return s8[k-1];
    if (n == 16) return s16[k-1];
    return s32[k-1];
  endfunction

  // type: 0 DCT-II, 1 DCT-VIII, 2 DST-VII; basis i, sample j
  function automatic int coef(int ttype, int n, int i, int j);
    real v, a;
    int  k, mag;
    if (ttype == 0) begin
      if (i == 0) return 64;
      v = $cos(PI * i * (2*j + 1) / (2.0 * n));
      a = $acos(v < 0 ? -v : v);
      k = int'(a * 128.0 / PI);
      mag = dct_tab(k);
    end else begin
      if (ttype == 1) v = $cos(PI * (2*i + 1) * (2*j + 1) / (4.0 * n + 2.0));
      else            v = $sin(PI * (2*i + 1) * (j + 1) / (2.0 * n + 1.0));
      a = $asin(v < 0 ? -v : v);
      k = int'(a * (2.0 * n + 1.0) / PI);
      mag = sin_tab(n, k);
    end
    return (v < -1e-9) ? -mag : mag;
  endfunction

  function automatic longint round_clip(longint v, int sh, int w);
    longint r, hi, lo;
    r  = (v + (longint'(1) << (sh - 1))) >>> sh;
    hi = (longint'(1) << (w - 1)) - 1;
    lo = -(longint'(1) << (w - 1));
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return r;
  endfunction

  function automatic longint clip(longint v, int w);
    longint hi, lo;
    hi = (longint'(1) << (w - 1)) - 1;
    lo = -(longint'(1) << (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // H.264 4x4 inverse core transform of one row or column, written as the standard's
  // butterfly with its d>>1 terms (not as a matrix). second = 0: first (row) stage,
  // result clipped to 16 bits; second = 1: column stage then (h + 32) >> 6, clipped.
  function automatic longint avc4_1d(int d[64], int j, bit second);
    longint e0, e1, e2, e3, f [4];
    e0 = longint'(d[0]) + d[2];
    e1 = longint'(d[0]) - d[2];
    e2 = (longint'(d[1]) >>> 1) - d[3];
    e3 = longint'(d[1]) + (longint'(d[3]) >>> 1);
    f[0] = e0 + e3; f[1] = e1 + e2; f[2] = e1 - e2; f[3] = e0 - e3;
    if (j > 3) return 0;
    return second ? clip((f[j] + 32) >>> 6, 16) : clip(f[j], 16);
  endfunction

  // all matrices, computed once: mat[type][log2(n)-2][i][j]
  int mat [3][5][64][64];
  bit mat_ok = 0;

  function automatic void init_mats();
    for (int t = 0; t < 3; t++)
      for (int s = 0; s < 5; s++)
        for (int i = 0; i < (4 << s); i++)
          for (int j = 0; j < (4 << s); j++)
            mat[t][s][i][j] = (t != 0 && s == 4) ? 0 : coef(t, 4 << s, i, j);
    mat_ok = 1;
  endfunction

  // raw 1-D inverse transform sum of output j
  function automatic longint ref_sum(int ttype, int n, int y[64], int j);
    longint s = 0;
    int sz = $clog2(n) - 2;
    if (!mat_ok) init_mats();
    for (int i = 0; i < n; i++) s += longint'(mat[ttype][sz][i][j]) * y[i];
    return s;
  endfunction

endpackage
