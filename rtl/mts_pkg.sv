// mts_pkg -- shared types, sizes and transform kernels of the 1-D inverse MTS core.
//
// The core computes the 1-D inverse transforms of VVC multiple transform selection:
// DCT-II of 4 to 64 points and DST-VII / DCT-VIII of 4 to 32 points, at two output
// samples per clock, with 32 regular multipliers fed from a coefficient ROM.
//
// This package holds:
//   * the enum encodings of tr_type and tr_size, which follow the interface table of
//     the design (0 DCT-II, 1 DCT-VIII, 2 DST-VII; 0..4 for 4..64 points);
//   * the integer kernels. dct2_coef(n, i, j) is the VVC integer DCT-II, row i (frequency)
//     and column j (sample), built from the 64-point table: each entry is a signed copy
//     of one of the standard's tabulated values for cos(k*pi/128), k = i*(2j+1)*64/n
//     folded into 0..64. dst7_coef(n, i, j) is the VVC integer DST-VII, built the same
//     way from the tabulated values of sin(k*pi/(2n+1)), k = 1..n, with
//     k = (2i+1)(j+1) folded into 0..n;
//   * the H.264 (AVC) 4x4 inverse core transform, scaled by 2 (avc4_coef);
//   * the layout of the coefficient ROM (rom_word) and the per-size constants.
// DCT-VIII has no table of its own: the core derives it from DST-VII by a sign change of
// the odd-indexed inputs and a reversal of the outputs.
// The ROM layout, the bit widths and the rounding shifts are this design's choices;
// the shifts are those of the VVC/HEVC inverse transform (7 after the first stage,
// 20 - bit depth after the second) and of H.264 (exact halving after the first stage,
// (x + 32) >> 6 after the second).
package mts_pkg;

  // tr_type encoding (interface table)
  typedef enum logic [1:0] {
    TR_DCT2 = 2'd0,
    TR_DCT8 = 2'd1,
    TR_DST7 = 2'd2
  } tr_type_e;

  // tr_size encoding (interface table)
  typedef enum logic [2:0] {
    SZ4  = 3'd0,
    SZ8  = 3'd1,
    SZ16 = 3'd2,
    SZ32 = 3'd3,
    SZ64 = 3'd4
  } tr_size_e;

  localparam int N_MULT    = 32;    // regular multipliers
  localparam int COEF_W    = 8;     // signed coefficient width (|c| <= 91)
  localparam int ROM_W     = N_MULT * COEF_W;  // 256-bit ROM word
  localparam int ROM_DEPTH = 94;    // words, see rom_base()
  localparam int ROM_AW    = 7;
  localparam int ACC_W     = 32;    // accumulator width (29 bits are enough for 16-bit inputs)
  localparam int DL_DEPTH  = 32;    // output delay line, in 2-sample words
  // cycles from the first data_in cycle of a row to its first output pair
  localparam int LATENCY   = 36;

  // Per-cycle control carried down the pipeline with the data.
  typedef struct packed {
    logic     valid;   // a data_in cycle
    logic     first;   // first cycle of a row (clears the accumulators)
    logic     last;    // last cycle of a row (row result complete)
    tr_type_e ttype;
    tr_size_e tsize;
    logic     dir;     // 0 horizontal, 1 vertical
    logic     avc;     // H.264 4x4 transform (avc_vvc = 0)
    logic [4:0] cyc;   // cycle index within the row
  } ctl_t;

  function automatic int npoints(tr_size_e s);
    return 4 << s;
  endfunction

  // one input sample per cycle (zeroed-out sizes), otherwise two
  function automatic logic half_rate(tr_type_e t, tr_size_e s);
    return (t == TR_DCT2) ? (s == SZ64) : (s == SZ32);
  endfunction

  // H.264 4x4 inverse core transform, scaled by 2 so that its halves are integers:
  // basis rows {2,2,2,2}, {2,1,-1,-2}, {2,-2,-2,2}, {1,-2,2,-1}. Every output has exactly
  // one halved term; mts_out_stage halves the sum so that it rounds like the standard's d>>1.
  function automatic int avc4_coef(int i, int j);
    int r [4][4] = '{'{2, 2, 2, 2}, '{2, 1, -1, -2}, '{2, -2, -2, 2}, '{1, -2, 2, -1}};
    return r[i][j];
  endfunction

  // ---------------------------------------------------------------- kernels
  // |cos(k*pi/128)| scaled as in the VVC 64-point DCT-II, k = 1..64
  function automatic int dct_mag(int k);
    int t64 [32] = '{91, 90, 90, 90, 88, 87, 86, 84, 83, 81, 79, 77, 73, 71, 69, 65,
                     62, 59, 56, 52, 48, 44, 41, 37, 33, 28, 24, 20, 15, 11,  7,  2};
    int t32 [16] = '{90, 90, 88, 85, 82, 78, 73, 67, 61, 54, 46, 38, 31, 22, 13,  4};
    int t16 [8]  = '{90, 87, 80, 70, 57, 43, 25,  9};
    int t8  [4]  = '{89, 75, 50, 18};
    if (k == 64) return 0;
    if (k == 32) return 64;
    if (k == 16) return 83;
    if (k == 48) return 36;
    if (k % 2 == 1)  return t64[(k - 1) / 2];
    if (k % 4 == 2)  return t32[(k - 2) / 4];
    if (k % 8 == 4)  return t16[(k - 4) / 8];
    return t8[(k - 8) / 16];
  endfunction

  // VVC integer DCT-II of n points, basis i, sample j
  function automatic int dct2_coef(int n, int i, int j);
    int th;
    if (i == 0) return 64;
    th = ((i * (64 / n)) * (2 * j + 1)) % 256;
    if (th > 128) th = 256 - th;
    if (th <= 64) return dct_mag(th);
    return -dct_mag(128 - th);
  endfunction

  // |sin(k*pi/(2n+1))| scaled as in the VVC DST-VII of n points, k = 1..n
  function automatic int dst_mag(int n, int k);
    int u4  [4]  = '{29, 55, 74, 84};
    int u8  [8]  = '{17, 32, 46, 60, 71, 78, 85, 86};
    int u16 [16] = '{8, 17, 25, 33, 40, 48, 55, 62, 68, 73, 77, 81, 85, 87, 88, 88};
    int u32 [32] = '{4, 9, 13, 17, 21, 26, 30, 34, 38, 42, 46, 50, 53, 56, 60, 63,
                     66, 68, 72, 74, 77, 78, 80, 82, 84, 85, 86, 88, 88, 89, 90, 90};
    if (k == 0) return 0;
    case (n)
      4:       return u4[k - 1];
      8:       return u8[k - 1];
      16:      return u16[k - 1];
      default: return u32[k - 1];
    endcase
  endfunction

  // VVC integer DST-VII of n points, basis i, sample j
  function automatic int dst7_coef(int n, int i, int j);
    int m, mm, k;
    logic neg;
    mm  = 2 * n + 1;
    m   = ((2 * i + 1) * (j + 1)) % (2 * mm);
    neg = (m > mm);
    if (neg) m = m - mm;
    k = (m > mm - m) ? mm - m : m;
    return neg ? -dst_mag(n, k) : dst_mag(n, k);
  endfunction

  // ---------------------------------------------------------------- ROM layout
  // One word per input cycle of a row; slot m (bits 8m+7:8m) feeds multiplier m.
  //   DCT-II 64  : word c = C64[c][0..31]                     (c = 0..31, one sample/cycle)
  //   DCT-II n<64: word c = {Cn[2c+1][0..n/2-1], Cn[2c][0..n/2-1]} in slots 16.. and 0..
  //   DST-VII 32 : word c = S32[c][0..31]                     (c = 0..15, one sample/cycle)
  //   DST-VII n<32: word c = {Sn[2c+1][0..n-1], Sn[2c][0..n-1]} in slots 16.. and 0..
  //   H.264 4x4  : word c = {A[2c+1][0..3], A[2c][0..3]} in slots 16.. and 0.. (92, 93)
  function automatic int rom_base(tr_type_e t, tr_size_e s, logic avc);
    if (avc) return 92;
    if (t == TR_DCT2) begin
      case (s)
        SZ64:    return 0;
        SZ32:    return 32;
        SZ16:    return 48;
        SZ8:     return 56;
        default: return 60;
      endcase
    end else begin
      case (s)
        SZ32:    return 62;
        SZ16:    return 78;
        SZ8:     return 86;
        default: return 90;
      endcase
    end
  endfunction

  function automatic logic [ROM_W-1:0] rom_word(int a);
    logic [ROM_W-1:0] w;
    int n, c, v;
    w = '0;
    for (int m = 0; m < N_MULT; m++) begin
      v = 0;
      if (a < 32) begin
        v = dct2_coef(64, a, m);
      end else if (a < 62) begin
        if (a < 48)      begin n = 32; c = a - 32; end
        else if (a < 56) begin n = 16; c = a - 48; end
        else if (a < 60) begin n = 8;  c = a - 56; end
        else             begin n = 4;  c = a - 60; end
        if ((m % 16) < n / 2) v = dct2_coef(n, 2 * c + m / 16, m % 16);
      end else if (a < 78) begin
        v = dst7_coef(32, a - 62, m);
      end else if (a >= 92) begin
        if ((m % 16) < 4) v = avc4_coef(2 * (a - 92) + m / 16, m % 16);
      end else begin
        if (a < 86)      begin n = 16; c = a - 78; end
        else if (a < 90) begin n = 8;  c = a - 86; end
        else             begin n = 4;  c = a - 90; end
        if ((m % 16) < n) v = dst7_coef(n, 2 * c + m / 16, m % 16);
      end
      w[m*COEF_W +: COEF_W] = v[COEF_W-1:0];
    end
    return w;
  endfunction

endpackage
