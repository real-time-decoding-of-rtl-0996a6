// relay_pkg: shared types, constants and decoding-graph functions of the
// Relay-BP sliding-window decoder.
//
// Number formats follow the decoder's int4.2.8 arithmetic: BP messages are
// sign + MAG_W-bit magnitude, priors are unsigned MAG_W-bit integers,
// marginals are two's complement, and memory strengths are carried as
// beta_int = round((1 - gamma) * 2^MS_SHIFT).
//
// The decoding graph is the windowed check matrix H~ of a bivariate-bicycle
// (BB) code. The code is H = [A | B] with A = x^3 + y + y^2 and
// B = y^3 + x + x^2, x = S_l (x) I_m and y = I_l (x) S_m (cyclic shifts);
// l = 12, m = 6 gives the [[144,12,12]] gross code, l = m = 6 gives the
// [[72,12,6]] code used by the smaller testbenches. The window over W cycles
// is phenomenological (a choice of this design, the circuit-level matrix is
// not reproduced):
//   check (t,k), t < W, k < MD              -> check index  t*MD + k
//   data-qubit error (t,q), q < NQ          -> error index  t*NQ + q
//                         touches checks (t, k) for H[k][q] = 1
//   measurement error (t,k)                 -> error index  W*NQ + t*MD + k
//                         touches checks (t,k) and (t+1,k) if t+1 < W
// Check slots 0..2 hold the A terms, 3..5 the B terms, 6 the measurement
// error of the same cycle, 7 that of the previous cycle. Error-node slots
// are 0..2 (data) or 0..1 (measurement). All functions are constant
// functions, so every CNU/VNU is wired at elaboration time.
package relay_pkg;

  localparam int MAG_W    = 4;   // message magnitude bits
  localparam int MS_SHIFT = 3;   // memory-strength scale M = 2^3 = 8
  localparam int BETA_W   = 5;   // beta_int in [0, 2M] = [0, 16]
  localparam int SUM_W    = MAG_W + 4; // adder-tree width (signed)
  localparam int MARG_W   = MAG_W + 1; // saturated marginal (signed)
  localparam int IT_W     = 16;  // iteration / leg counters
  localparam int DC       = 8;   // max check-node degree
  localparam int DV       = 3;   // max error-node degree
  localparam int MAXMAG   = (1 << MAG_W) - 1;

  // Monomial exponents x^a y^b of the A and B polynomials.
  localparam int A_X [3] = '{3, 0, 0};
  localparam int A_Y [3] = '{0, 1, 2};
  localparam int B_X [3] = '{0, 1, 2};
  localparam int B_Y [3] = '{3, 0, 0};

  // Kinds of item in the syndrome stream.
  typedef enum logic [1:0] {
    ITEM_SYND = 2'd0,  // one syndrome round
    ITEM_CW   = 2'd1,  // final codeword (data-qubit readout)
    ITEM_END  = 2'd2   // end marker: appends an all-zero detector row
  } item_kind_e;

  // Check-to-error message in the deferred exclusive-min form.
  typedef struct packed {
    logic             s;     // sign: kappa * (-1)^sigma, 1 = negative
    logic             c;     // 1: this edge holds min1, use min2
    logic [MAG_W-1:0] min1;
    logic [MAG_W-1:0] min2;
  } cmsg_t;

  // Memory-strength control shared by all error nodes of a leg.
  typedef struct packed {
    logic              first_leg; // leg 1 uses beta0 on every node
    logic [BETA_W-1:0] beta0;     // (1 - gamma_0) * M
    logic [BETA_W-1:0] beta_min;  // lower end of the random draw
    logic [BETA_W-1:0] beta_max;  // upper end of the random draw
  } ms_cfg_t;

  // Error-to-check message, sign + magnitude.
  typedef struct packed {
    logic             s;
    logic [MAG_W-1:0] m;
  } vmsg_t;

  // Code / window sizes.
  function automatic int nq_f(input int l, input int m);  return 2 * l * m; endfunction
  function automatic int md_f(input int l, input int m);  return l * m;     endfunction
  function automatic int nv_f(input int l, input int m, input int w);
    return w * (nq_f(l, m) + md_f(l, m));
  endfunction
  function automatic int nc_f(input int l, input int m, input int w);
    return w * md_f(l, m);
  endfunction

  function automatic int pmod(input int a, input int n);
    int r;
    r = a % n;
    return (r < 0) ? r + n : r;
  endfunction

  // Data qubit of code-check k on slot s (0..5) of H = [A | B].
  function automatic int code_chk_q(input int l, input int m, input int k, input int s);
    int ci, cj;
    ci = k / m; cj = k % m;
    if (s < 3) return pmod(ci + A_X[s], l) * m + pmod(cj + A_Y[s], m);
    return l * m + pmod(ci + B_X[s-3], l) * m + pmod(cj + B_Y[s-3], m);
  endfunction

  // Code check seen by data qubit q on its slot r (0..2), and the slot of
  // the check the edge sits on.
  function automatic int code_var_k(input int l, input int m, input int q, input int r);
    int qi, qj;
    if (q < l * m) begin
      qi = q / m; qj = q % m;
      return pmod(qi - A_X[r], l) * m + pmod(qj - A_Y[r], m);
    end
    qi = (q - l * m) / m; qj = (q - l * m) % m;
    return pmod(qi - B_X[r], l) * m + pmod(qj - B_Y[r], m);
  endfunction
  function automatic int code_var_slot(input int l, input int m, input int q, input int r);
    return (q < l * m) ? r : 3 + r;
  endfunction

  // ---- windowed graph: check i, slot s -> error index, or -1 if absent
  function automatic int chk_nbr(input int l, input int m, input int w, input int i, input int s);
    int t, k, nq, md;
    nq = nq_f(l, m); md = md_f(l, m);
    t = i / md; k = i % md;
    if (s < 6)  return t * nq + code_chk_q(l, m, k, s);
    if (s == 6) return w * nq + t * md + k;
    if (t > 0)  return w * nq + (t - 1) * md + k;
    return -1;
  endfunction

  // ---- windowed graph: error j, slot r -> check index, or -1 if absent
  function automatic int var_chk(input int l, input int m, input int w, input int j, input int r);
    int t, k, q, nq, md;
    nq = nq_f(l, m); md = md_f(l, m);
    if (j < w * nq) begin
      t = j / nq; q = j % nq;
      return t * md + code_var_k(l, m, q, r);
    end
    t = (j - w * nq) / md; k = (j - w * nq) % md;
    if (r == 0) return t * md + k;
    if (r == 1 && t + 1 < w) return (t + 1) * md + k;
    return -1;
  endfunction

  // ---- slot of edge (error j, slot r) on its check
  function automatic int var_slot(input int l, input int m, input int w, input int j, input int r);
    int nq;
    nq = nq_f(l, m);
    if (j < w * nq) return code_var_slot(l, m, j % nq, r);
    return (r == 0) ? 6 : 7;
  endfunction

  // ---- cycle of error node j inside the window
  function automatic int var_cycle(input int l, input int m, input int w, input int j);
    int nq, md;
    nq = nq_f(l, m); md = md_f(l, m);
    if (j < w * nq) return j / nq;
    return (j - w * nq) / md;
  endfunction

  // Saturate a signed value to +-MAXMAG.
  function automatic logic signed [SUM_W-1:0] sat_mag(input logic signed [SUM_W-1:0] v);
    if (v >  SUM_W'(MAXMAG))  return SUM_W'(MAXMAG);
    if (v < -SUM_W'(MAXMAG))  return -SUM_W'(MAXMAG);
    return v;
  endfunction

endpackage
