// Shared types, constants and kernel functions of the VVC inverse transform.
//
// The integer DCT-II kernels are generated from the unique magnitudes of the
// 64-point VVC matrix (which contains the 32/16/8/4-point matrices of HEVC as
// its even rows): entry T[k][n] of the N-point matrix is the folded value of
// cos(pi*j/128) with j = k*(2n+1)*64/N.  The DST-VII kernels are generated
// from the N unique magnitudes of each size: entry S[i][j] is the folded
// value of sin(pi*(2i+1)(j+1)/(2N+1)).  The magnitudes are the integer
// values of the VVC standard; the paper gives the real-valued definitions.
// DCT-VIII is never stored: it is derived from DST-VII by a sign change of
// the odd input coefficients and a reversal of the output vector.
package vvc_tr_pkg;

  // Transform type, coded as trType in the standard (0: DCT-II, 1: DCT-VIII, 2: DST-VII)
  typedef enum logic [1:0] {
    TR_DCT2 = 2'd0,
    TR_DCT8 = 2'd1,
    TR_DST7 = 2'd2
  } tr_type_e;

  // Transform direction (0: horizontal, 1: vertical)
  typedef enum logic {
    DIR_HOR  = 1'b0,
    DIR_VERT = 1'b1
  } tr_dir_e;

  localparam int unsigned NBI      = 18;  // input / intermediate sample width
  localparam int unsigned NBO      = 11;  // residual (output) sample width
  localparam int unsigned COEF_W   = 8;   // kernel coefficient width
  localparam int unsigned NMULT    = 32;  // regular multipliers per core
  localparam int unsigned ACC_W    = 34;  // accumulator width
  localparam int unsigned BIT_DEPTH = 10; // video bit depth (Main 10)

  // Size codes: 0:4, 1:8, 2:16, 3:32, 4:64 (Table 8)
  typedef logic [2:0] size_code_t;

  // Row offsets of each kernel in the MTS coefficient ROM
  localparam int unsigned MTS_ROM_ROWS = 92;

  // Unique magnitudes of the 64-point DCT-II, indexed by angle j in
  // cos(pi*j/128), j = 0..64 (j = 0 is the DC value 64).
  function automatic int dct2_mag(input int j);
    int v64[32] = '{91,90,90,90,88,87,86,84,83,81,79,77,73,71,69,65,
                    62,59,56,52,48,44,41,37,33,28,24,20,15,11,7,2};
    int v32[16] = '{90,90,88,85,82,78,73,67,61,54,46,38,31,22,13,4};
    int v16[8]  = '{90,87,80,70,57,43,25,9};
    int v8[4]   = '{89,75,50,18};
    if (j == 0)       return 64;
    else if (j == 64) return 0;
    else if (j == 32) return 64;
    else if (j == 16) return 83;
    else if (j == 48) return 36;
    else if (j % 2 == 1) return v64[(j - 1) / 2];
    else if (j % 4 == 2) return v32[(j - 2) / 4];
    else if (j % 8 == 4) return v16[(j - 4) / 8];
    else return v8[(j - 8) / 16];
  endfunction

  // DCT-II entry T[k][n] of the N-point matrix (k: basis, n: sample)
  function automatic int dct2_coef(input int n_pt, input int k, input int n);
    int j;
    j = (k * (2 * n + 1) * (64 / n_pt)) % 256;
    if (j <= 64)       return  dct2_mag(j);
    else if (j <= 128) return -dct2_mag(128 - j);
    else if (j <= 192) return -dct2_mag(j - 128);
    else               return  dct2_mag(256 - j);
  endfunction

  // Unique magnitudes of the N-point DST-VII, m = 1..N
  function automatic int dst7_mag(input int n_pt, input int m);
    int c4[4]   = '{29,55,74,84};
    int c8[8]   = '{17,32,46,60,71,78,85,86};
    int c16[16] = '{8,17,25,33,40,48,55,62,68,73,77,81,85,87,88,88};
    int c32[32] = '{4,9,13,17,21,26,30,34,38,42,46,50,53,56,60,63,
                    66,68,72,74,77,78,80,82,84,85,86,88,88,89,90,90};
    case (n_pt)
      4:       return c4[m - 1];
      8:       return c8[m - 1];
      16:      return c16[m - 1];
      default: return c32[m - 1];
    endcase
  endfunction

  // DST-VII entry S[i][j] of the N-point matrix (i: basis, j: sample)
  function automatic int dst7_coef(input int n_pt, input int i, input int j);
    int p, m, s;
    p = 2 * n_pt + 1;
    m = ((2 * i + 1) * (j + 1)) % (2 * p);
    s = 1;
    if (m > p) begin
      m = m - p;
      s = -1;
    end
    if (m == 0 || m == p) return 0;
    if (m > n_pt) m = p - m;
    return s * dst7_mag(n_pt, m);
  endfunction

  // First ROM row of each kernel: DCT-II 4,8,16,32,64 then DST-VII 4,8,16,32
  function automatic int mts_rom_base(input logic is_dst, input int szc);
    int dct_base[5] = '{0, 2, 6, 14, 30};
    int dst_base[4] = '{62, 64, 68, 76};
    return is_dst ? dst_base[szc] : dct_base[szc];
  endfunction

  // A line is processed in "zeroing" mode (one new input sample per cycle,
  // both input lanes carry it) for the 64-point DCT-II and the 32-point
  // DST-VII / DCT-VIII, whose effective input length is half the output length.
  function automatic logic is_zero_mode(input tr_type_e t, input size_code_t szc);
    return (t == TR_DCT2) ? (szc == 3'd4) : (szc == 3'd3);
  endfunction

  // Effective (non-zeroed) length of a line: min(N,32) for DCT-II, min(N,16) otherwise
  function automatic int eff_len(input tr_type_e t, input size_code_t szc);
    int n;
    n = 4 << szc;
    if (t == TR_DCT2) return (n > 32) ? 32 : n;
    else              return (n > 16) ? 16 : n;
  endfunction

  localparam int unsigned LFNST_WIN  = 24;  // longest LFNST input window (48 outputs / 2)
  localparam int unsigned MTS_WIN    = 32;  // longest MTS line (64 outputs / 2)
  // Fixed latencies, first input to first output pair (see mts_1d, lfnst_core)
  localparam int unsigned MTS_LAT    = 36;  // first input of a line to first output pair
  localparam int unsigned LFNST_LAT  = 30;  // start pulse to first output pair

endpackage
