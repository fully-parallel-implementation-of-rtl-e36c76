// memc_pkg -- shared fixed-point format, model constants and the default
// problem generator of the memcomputing 3-SAT solver.
//
// All state variables are integers equal to the real model variable times
// 2^FRAC (FRAC = 14): v_n in [-1,1] becomes V_n in [-16384,16384], the short
// memory x_s in [0,1] becomes X_s in [0,16384], the long memory x_l in
// [1, 1e4*M] becomes X_l in [16384, 1e4*M*16384].  The model constants are
// powers of two where possible so that products become shifts:
//   alpha = 4, beta = 16, gamma = 2^-2, delta = 819*2^-14, eps = 2^-10,
//   zeta = 2^-10, dt = 2^-4 (all as published for this solver).
// The widths (16-bit V and X_s, 40-bit X_l, 48-bit clause contributions) and
// the initial value of X_s are choices of this design.
//
// planted_lit() is this design's own deterministic generator of a random
// 3-SAT instance with a hidden (planted) solution.  It is a pure function of
// (seed, variable count, clause, slot) so that it can be evaluated at
// elaboration time; the solver hard-wires the instance it returns, as an
// FPGA build hard-wires the problem it solves.
package memc_pkg;

  // ---- fixed-point format ------------------------------------------------
  localparam int FRAC = 14;                       // scale factor 2^14
  localparam longint ONE = longint'(1) << FRAC;               // 1.0
  localparam int VW   = 16;                       // V_n, signed
  localparam int XSW  = 16;                       // X_s, signed container
  localparam int XLW  = 40;                       // X_l, unsigned
  localparam int DVW  = 48;                       // clause contribution / sum
  localparam int IDXW = 15;                       // variable index in a literal

  typedef logic signed [VW-1:0]  v_t;
  typedef logic signed [XSW-1:0] xs_t;
  typedef logic        [XLW-1:0] xl_t;
  typedef logic signed [DVW-1:0] dv_t;

  // ---- model constants (scaled) -----------------------------------------
  localparam int ALPHA_SH = 2;                    // alpha = 4
  localparam int BETA_SH  = 4;                    // beta  = 16
  localparam longint GAMMA_S = ONE >> 2;             // 2^14 * gamma = 4096
  localparam longint DELTA_S = 819;                  // 2^14 * delta
  localparam longint EPS_S   = ONE >> 10;            // 2^14 * eps = 16
  localparam int ZETA_SH  = 10;                   // zeta  = 2^-10
  localparam int DT_SH    = 4;                    // dt    = 2^-4
  localparam int XL_BOUND = 10000;                // x_l <= 1e4 * M

  // Initial short memory X_s (0.5).  Not given by the published design.
  localparam longint XS_INIT = ONE >> 1;

  // ---- literal of a clause ----------------------------------------------
  // neg = 1: the negated variable enters the clause (q = -1).
  typedef struct packed {
    logic            neg;
    logic [IDXW-1:0] idx;
  } lit_t;

  // ---- deterministic planted 3-SAT instance ------------------------------
  function automatic int unsigned mix32(int unsigned x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Value of variable n in the hidden solution.
  function automatic logic planted_value(int unsigned seed, int n);
    int unsigned h;
    h = mix32(mix32(seed ^ 32'h5bd1e995) ^ n);
    return h[0];
  endfunction

  // Literal s (0..2) of clause m.  Three distinct variables are drawn
  // uniformly; the signs are drawn uniformly among the seven patterns that
  // the hidden solution satisfies.
  function automatic lit_t planted_lit(int unsigned seed, int n_vars, int m, int s);
    int unsigned h;
    int          vi [3];
    int          k;
    logic [2:0]  pat;
    logic        pv;
    lit_t        l;
    k = 0;
    for (int j = 0; j < 3; j++) begin
      vi[j] = -1;
      while (vi[j] < 0) begin
        h = mix32(mix32(seed) ^ ((m << 6) + k));
        k = k + 1;
        vi[j] = int'(h % n_vars);
        if ((j > 0 && vi[j] == vi[0]) || (j > 1 && vi[j] == vi[1])) vi[j] = -1;
      end
    end
    h   = mix32(mix32(seed + 1) ^ m);
    pat = 3'(h % 7 + 1);
    pv  = planted_value(seed, vi[s]);
    l.idx = IDXW'(vi[s]);
    l.neg = pat[s] ? ~pv : pv;
    return l;
  endfunction

endpackage
