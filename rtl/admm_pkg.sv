// admm_pkg: shared fixed-point formats, code tables and elaboration-time
// helper functions of the ADMM-LP decoder.
//
// Fixed-point formats are signed Qi.f numbers (1 sign bit, i integer bits,
// f fraction bits).  The widths below follow the message table of the
// decoder description: LLRs Q0.7, variable-to-check messages and estimates
// Q0.9, check-to-variable messages and check states Q2.7, the check-node
// sum v Q3.9, the replica z Q0.12, the simplex input Q4.9 and output Q0.13.
//
// The three quasi-cyclic codes (Tanner [155,64], WiGig [672,546] and one
// member of the (3,6)-regular [1002,503] ensemble) are given as shift
// matrices; -1 marks an all-zero tile.  Tile (r,k) with shift sh connects
// check r*P+j to variable k*P+((j+sh) mod P).  That orientation of the
// circulant is this design's own convention.
package admm_pkg;

  // ---------------------------------------------------------------- widths
  localparam int LLR_W  = 8;   // Q0.7   gamma_i
  localparam int LLR_F  = 7;
  localparam int VTC_W  = 10;  // Q0.9   x_i, x_Nc(j)
  localparam int VTC_F  = 9;
  localparam int CTV_W  = 10;  // Q2.7   m, lambda
  localparam int CTV_F  = 7;
  localparam int V_W    = 13;  // Q3.9   v_j
  localparam int V_F    = 9;
  localparam int Z_W    = 13;  // Q0.12  z_j, polytope output w
  localparam int Z_F    = 12;
  localparam int VT_W   = 14;  // Q4.9   v-tilde, simplex input and rho
  localparam int SP_W   = 14;  // Q0.13  simplex output
  localparam int SP_F   = 13;
  localparam int RECIP_W = 25; // Q0.24  reciprocal constants
  localparam int RECIP_F = 24;

  // Maximum iteration count used in all of the paper's runs.
  localparam int MAX_ITER_DEFAULT = 60;

  // Penalty 0.1 in Q0.7 (13/128 = 0.1016).
  localparam logic [LLR_W-1:0] ALPHA_0P1 = 8'd13;

  // ---------------------------------------------------------- code tables
  localparam int TANNER_R = 3, TANNER_S = 5, TANNER_P = 31;
  localparam int TANNER_SHIFT [TANNER_R][TANNER_S] = '{
    '{30, 29, 27, 23, 15},
    '{26, 21, 11, 22, 13},
    '{ 6, 12, 24, 17,  3}};

  localparam int ENS_R = 3, ENS_S = 6, ENS_P = 167;
  localparam int ENS_SHIFT [ENS_R][ENS_S] = '{
    '{115,  13,  25, 166,  17, 129},
    '{124,  38, 137,  13, 160, 136},
    '{ 75, 152,  89,  73,   0, 145}};

  localparam int WIGIG_R = 3, WIGIG_S = 16, WIGIG_P = 42;
  localparam int WIGIG_SHIFT [WIGIG_R][WIGIG_S] = '{
    '{29, 30,  0,  8, 33, 22, 17,  4, 27, 28, 20, 27, 24, 23, -1, -1},
    '{37, 31, 18, 23, 11, 21,  6, 20, 32,  9, 12, 29, 10,  0, 13, -1},
    '{25, 22,  4, 34, 31,  3, 14, 15,  4,  2, 14, 18, 13, 13, 22, 24}};

  // The decoder is elaborated for one code, chosen by this enum.
  typedef enum int {
    CODE_TANNER   = 0,   // [155,64] Tanner code, 3 x 5 tiles of 31 x 31
    CODE_WIGIG    = 1,   // [672,546] IEEE 802.11ad code, 3 x 16 tiles of 42 x 42
    CODE_ENSEMBLE = 2    // [1002,503] (3,6)-regular code, 3 x 6 tiles of 167 x 167
  } code_e;

  function automatic int code_r(input code_e c);
    case (c)
      CODE_TANNER: return TANNER_R;
      CODE_WIGIG:  return WIGIG_R;
      default:     return ENS_R;
    endcase
  endfunction

  function automatic int code_s(input code_e c);
    case (c)
      CODE_TANNER: return TANNER_S;
      CODE_WIGIG:  return WIGIG_S;
      default:     return ENS_S;
    endcase
  endfunction

  function automatic int code_p(input code_e c);
    case (c)
      CODE_TANNER: return TANNER_P;
      CODE_WIGIG:  return WIGIG_P;
      default:     return ENS_P;
    endcase
  endfunction

  // Shift of tile (r,k), -1 for an all-zero tile.
  function automatic int code_shift(input code_e c, input int r, input int k);
    if (r < 0 || r >= code_r(c) || k < 0 || k >= code_s(c)) return -1;
    case (c)
      CODE_TANNER: return TANNER_SHIFT[r][k];
      CODE_WIGIG:  return WIGIG_SHIFT[r][k];
      default:     return ENS_SHIFT[r][k];
    endcase
  endfunction

  // Degree of the checks of macro-row r.
  function automatic int row_deg(input code_e c, input int r);
    int d;
    d = 0;
    for (int k = 0; k < code_s(c); k++) if (code_shift(c, r, k) >= 0) d++;
    return d;
  endfunction

  // Degree of the variables of macro-column k.
  function automatic int col_deg(input code_e c, input int k);
    int d;
    d = 0;
    for (int r = 0; r < code_r(c); r++) if (code_shift(c, r, k) >= 0) d++;
    return d;
  endfunction

  // Column of the e-th non-zero tile of macro-row r.
  function automatic int col_of(input code_e c, input int r, input int e);
    int n;
    n = 0;
    for (int k = 0; k < code_s(c); k++) begin
      if (code_shift(c, r, k) >= 0) begin
        if (n == e) return k;
        n++;
      end
    end
    return 0;
  endfunction

  // Row of the e-th non-zero tile of macro-column k.
  function automatic int row_of(input code_e c, input int k, input int e);
    int n;
    n = 0;
    for (int r = 0; r < code_r(c); r++) begin
      if (code_shift(c, r, k) >= 0) begin
        if (n == e) return r;
        n++;
      end
    end
    return 0;
  endfunction

  // ------------------------------------------------ elaboration functions
  function automatic int clog2c(input int x);
    int r;
    r = 0;
    while ((1 << r) < x) r++;
    return (r < 1) ? 1 : r;
  endfunction

  // Pipeline latencies of the node modules (cycles from in_valid to
  // out_valid); the modules compute the same values internally.
  function automatic int vn_latency(input int dv);
    return log2_exact(dv + 1) + 3;
  endfunction

  function automatic int simplex_latency(input int d);
    int l;
    l = log2_exact(d);
    return l * (l + 1) / 2 + l + 4;
  endfunction

  function automatic int pp_latency(input int d);
    int l;
    l = log2_exact(d);
    return (l + 1) + 1 + l + 1 + simplex_latency(d) + 1;
  endfunction

  function automatic int cn_latency(input int d);
    return 1 + pp_latency(d) + 1;
  endfunction

  function automatic bit is_pow2(input int x);
    return (x > 0) && ((x & (x - 1)) == 0);
  endfunction

  function automatic int log2_exact(input int x);
    int r;
    r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  // round(2^RECIP_F / d), the reciprocal used for normalisation by d.
  function automatic logic signed [RECIP_W-1:0] recip(input int d);
    int num;
    num = (1 << RECIP_F);
    return RECIP_W'((num + d / 2) / d);
  endfunction

  // Drop k fraction bits, rounding to nearest with ties away from zero,
  // so that positive and negative values are treated alike (truncation
  // would bias the decoder towards one side).
  function automatic longint rnd_shr(input longint a, input int k);
    longint h;
    if (k <= 0) return a;
    h = longint'(1) <<< (k - 1);
    if (a >= 0) return (a + h) >>> k;
    else        return -((h - a) >>> k);
  endfunction

  // Saturate to the range of a w-bit signed number.
  function automatic longint sat(input longint a, input int w);
    longint hi, lo;
    hi = (longint'(1) <<< (w - 1)) - 1;
    lo = -(longint'(1) <<< (w - 1));
    if (a > hi) return hi;
    if (a < lo) return lo;
    return a;
  endfunction

endpackage
