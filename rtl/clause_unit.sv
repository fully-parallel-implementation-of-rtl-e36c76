// clause_unit -- one clause m of the memcomputing 3-SAT dynamics.
//
// What it does: from the three variable values V_i, V_j, V_k of its literals
// it forms, every clock, the scaled clause function
//     C'  = min(2^14 - q_i V_i, 2^14 - q_j V_j, 2^14 - q_k V_k) / 2,
// and for each literal n the term this clause adds to dV_n/dt,
//     Xl*Xs/2^14 * G'_n/2^14 + (2^14 + zeta*Xl)(2^14 - Xs)/2^14 * R'_n/2^14,
// with the gradient term G'_n = q_n min(other two of 2^14 - qV)/2 and the
// rigidity term R'_n = (q_n 2^14 - V_n)/2 when literal n is the one that
// sets C' (0 otherwise).  On each `step` it advances its two memories with
// one forward-Euler step of dt = 2^-4:
//     Xs += beta (Xs + 2^14 eps)(C' - 2^14 gamma) / 2^14 * dt,  clipped to [0, 2^14]
//     Xl += alpha (C' - 2^14 delta) * dt,                       clipped to [2^14, 1e4*M*2^14]
// `sat` is 1 when one of the literals is true, reading V >= 0 as TRUE.
//
// Interface: v[0..2] are the variable values of literals 0..2 (routed by the
// instantiating module); NEG[s] = 1 when literal s is negated.  contrib[s]
// and sat are combinational from v and the memory registers.  load (or
// reset) puts Xs = XS_INIT and Xl = 2^14.  step and load are single-cycle
// strobes; the whole datapath is combinational between the memory registers,
// so the surrounding design must leave it enough cycles per step.
//
// Follows the published model: equations, constants, the 2^14 scaling and
// the value ranges.  Own choices: every division by a power of two is an
// arithmetic right shift (rounds towards minus infinity); R is active for
// every literal that attains the minimum (ties included); the products are
// formed in 64-bit arithmetic; V = 0 reads as TRUE; the initial memories.
module clause_unit
  import memc_pkg::*;
#(
  parameter int         M   = 645,      // clauses in the problem (sets the Xl bound)
  parameter logic [2:0] NEG = 3'b000    // literal s negated
) (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  logic step,
  input  v_t   v       [3],
  output dv_t  contrib [3],
  output logic sat,
  output xs_t  xs,
  output xl_t  xl
);

  localparam longint XL_MAX = longint'(XL_BOUND) * longint'(M) * longint'(ONE);

  longint a [3];         // 2^14 - q V, in [0, 2^15]
  longint amin;
  longint c;             // C'
  longint wg, wr;        // weights of G and R
  longint xs_next, xl_next;

  always_comb begin
    for (int s = 0; s < 3; s++)
      a[s] = NEG[s] ? longint'(ONE) + longint'(v[s]) : longint'(ONE) - longint'(v[s]);
    amin = a[0];
    if (a[1] < amin) amin = a[1];
    if (a[2] < amin) amin = a[2];
    c  = amin >>> 1;
    wg = (longint'(xl) * longint'(xs)) >>> FRAC;
    wr = ((longint'(ONE) + (longint'(xl) >>> ZETA_SH)) * (longint'(ONE) - longint'(xs))) >>> FRAC;
    for (int s = 0; s < 3; s++) begin
      longint o1, o2, g, r, t;
      o1 = a[(s + 1) % 3];
      o2 = a[(s + 2) % 3];
      g  = ((o1 < o2) ? o1 : o2) >>> 1;
      if (NEG[s]) g = -g;
      r  = ((NEG[s] ? -longint'(ONE) : longint'(ONE)) - longint'(v[s])) >>> 1;
      t  = (wg * g) >>> FRAC;
      if (a[s] == amin) t = t + ((wr * r) >>> FRAC);
      contrib[s] = DVW'(t);
    end
    sat = 1'b0;
    for (int s = 0; s < 3; s++)
      if (NEG[s] ? v[s][VW-1] : !v[s][VW-1]) sat = 1'b1;

    xs_next = longint'(xs)
            + ((((longint'(xs) + EPS_S) * (c - GAMMA_S)) <<< BETA_SH) >>> (FRAC + DT_SH));
    if (xs_next < 0)   xs_next = 0;
    if (xs_next > ONE) xs_next = ONE;
    xl_next = longint'(xl) + (((c - DELTA_S) <<< ALPHA_SH) >>> DT_SH);
    if (xl_next < ONE)    xl_next = ONE;
    if (xl_next > XL_MAX) xl_next = XL_MAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs <= xs_t'(XS_INIT);
      xl <= xl_t'(ONE);
    end else if (load) begin
      xs <= xs_t'(XS_INIT);
      xl <= xl_t'(ONE);
    end else if (step) begin
      xs <= xs_t'(xs_next);
      xl <= xl_t'(xl_next);
    end
  end

  initial assert (XL_MAX < (longint'(1) <<< XLW))
    else $error("clause_unit: M too large for the X_l width");

endmodule
