// tb_ref_pkg: floating-point reference models used by the testbenches.
// They follow the textbook algorithms (projection onto the centred
// probability simplex by sort / shift / clip, and projection onto the
// centred parity polytope by facet identification, similarity transform
// and membership test) in double precision, with no fixed-point detail,
// so that the RTL can be compared against them within a tolerance.
package tb_ref_pkg;

  localparam int DMAX = 32;

  function automatic real clip(input real a, input real lo, input real hi);
    if (a < lo) return lo;
    if (a > hi) return hi;
    return a;
  endfunction

  function automatic real rabs(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // Projection of v[0..d-1] onto {w : sum(w + 1/2) = 1, w >= -1/2}.
  function automatic void simplex_ref(input int d, input real v [DMAX], output real w [DMAX]);
    real rho [DMAX];
    real tmp, acc, u, ustar;
    for (int i = 0; i < d; i++) rho[i] = v[i];
    for (int i = 0; i < d; i++)
      for (int j = i + 1; j < d; j++)
        if (rho[j] > rho[i]) begin tmp = rho[i]; rho[i] = rho[j]; rho[j] = tmp; end
    acc = -1.0;
    ustar = 0.0;
    for (int i = 0; i < d; i++) begin
      acc = acc + rho[i];
      u = acc / real'(i + 1);
      if (rho[i] > u) ustar = u;
    end
    for (int i = 0; i < d; i++) begin
      w[i] = v[i] - ustar - 0.5;
      if (w[i] < -0.5) w[i] = -0.5;
    end
  endfunction

  // Projection of v onto the centred parity polytope PP_d - 1/2.
  // is_in reports whether the clipped v was already in the polytope,
  // flipped whether the nearest cube vertex had even weight.
  function automatic void pp_ref(input int d, input real v [DMAX], output real w [DMAX],
                                 output bit is_in, output bit flipped);
    bit  f [DMAX];
    int  wt, imin;
    real vt [DMAX], ut [DMAX], s;
    wt = 0;
    imin = 0;
    for (int i = 0; i < d; i++) begin
      f[i] = (v[i] >= 0.0);
      if (f[i]) wt++;
      if (rabs(v[i]) < rabs(v[imin])) imin = i;
    end
    flipped = (wt % 2 == 0);
    if (flipped) f[imin] = !f[imin];
    s = 0.0;
    for (int i = 0; i < d; i++) begin
      vt[i] = f[i] ? -v[i] : v[i];
      s = s + clip(vt[i], -0.5, 0.5);
    end
    is_in = (s >= 1.0 - real'(d) / 2.0);
    simplex_ref(d, vt, ut);
    for (int i = 0; i < d; i++)
      w[i] = is_in ? clip(v[i], -0.5, 0.5) : (f[i] ? -ut[i] : ut[i]);
  endfunction

  // Uniform random real on the grid k / 2^frac, |k| <= maxk.
  function automatic int rnd_int(input int maxk);
    return int'($urandom_range(2 * maxk, 0)) - maxk;
  endfunction

  // ------------------------------------------------------------ codes
  // Random codewords of a quasi-cyclic code: the parity-check matrix is
  // built from the shift table, brought to reduced row echelon form over
  // GF(2) once, and each codeword is drawn by choosing the free bits at
  // random and solving for the pivot bits.
  localparam int NMAX = 1024;
  localparam int MMAX = 512;

  logic [NMAX-1:0] hrr [MMAX];
  int              piv [MMAX];
  int              nrank, code_n, code_m;

  function automatic void code_build(input admm_pkg::code_e c);
    int r_, s_, p_, row;
    logic [NMAX-1:0] tmp;
    bit is_piv [NMAX];
    r_ = admm_pkg::code_r(c); s_ = admm_pkg::code_s(c); p_ = admm_pkg::code_p(c);
    code_n = s_ * p_;
    code_m = r_ * p_;
    for (int r = 0; r < r_; r++)
      for (int j = 0; j < p_; j++) begin
        hrr[r*p_ + j] = '0;
        for (int k = 0; k < s_; k++) begin
          int sh;
          sh = admm_pkg::code_shift(c, r, k);
          if (sh >= 0) hrr[r*p_ + j][k*p_ + (j + sh) % p_] = 1'b1;
        end
      end
    row = 0;
    for (int col = 0; col < code_n && row < code_m; col++) begin
      int sel;
      sel = -1;
      for (int i = row; i < code_m; i++) if (hrr[i][col]) begin sel = i; break; end
      if (sel < 0) continue;
      tmp = hrr[sel]; hrr[sel] = hrr[row]; hrr[row] = tmp;
      for (int i = 0; i < code_m; i++) if (i != row && hrr[i][col]) hrr[i] = hrr[i] ^ hrr[row];
      piv[row] = col;
      row++;
    end
    nrank = row;
  endfunction

  function automatic logic [NMAX-1:0] code_random_word();
    logic [NMAX-1:0] x;
    bit is_piv [NMAX];
    for (int i = 0; i < NMAX; i++) is_piv[i] = 0;
    for (int i = 0; i < nrank; i++) is_piv[piv[i]] = 1;
    x = '0;
    for (int i = 0; i < code_n; i++) if (!is_piv[i]) x[i] = $urandom_range(1, 0);
    for (int i = 0; i < nrank; i++) begin
      logic [NMAX-1:0] t;
      t = hrr[i] & x;
      x[piv[i]] = ^t;
    end
    return x;
  endfunction

  // Number of unsatisfied checks of word x (uses the reduced matrix,
  // which has the same null space).
  function automatic int code_syndrome_weight(input logic [NMAX-1:0] x);
    int w;
    w = 0;
    for (int i = 0; i < nrank; i++) begin
      logic [NMAX-1:0] t;
      t = hrr[i] & x;
      if (^t) w++;
    end
    return w;
  endfunction

  // Standard normal sample (Box-Muller).
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(32'hFFFFFF, 1))) / 16777216.0;
    u2 = (real'($urandom_range(32'hFFFFFF, 0))) / 16777216.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK (bit 0 -> +1) over AWGN with noise sigma; the channel output is
  // saturated at +-(1 + sigma) and scaled so that the saturation values
  // map to the largest Q0.7 LLR magnitude.
  function automatic int channel_llr(input bit b, input real sigma);
    real y, lim, q;
    y = (b ? -1.0 : 1.0) + sigma * gauss();
    lim = 1.0 + sigma;
    y = clip(y, -lim, lim);
    q = y / lim * 127.0;
    return (q >= 0.0) ? int'($floor(q + 0.5)) : -int'($floor(-q + 0.5));
  endfunction

endpackage
