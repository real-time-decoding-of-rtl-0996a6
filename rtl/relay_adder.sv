// relay_adder: bias update, adder tree and marginal register of one error
// node (DMem-BP / Relay-BP extension of the VNU).
//
// Each VN phase it forms the node's bias
//     Lambda(t) = (1 - gamma) * Lambda(0) + gamma * M(t-1)
// with the reduced-logic multiplier ms_mul: beta = (1 - gamma) * M_SCALE is
// multiplied into |M| (sign re-applied afterwards, since the multiplier
// works on magnitudes) and into Lambda(0); gamma * M = M - (1-gamma) * M.
// When init is high the bias is Lambda(0) instead (mux input "1"). The bias
// is saturated to +-(2^MAG_W - 1), the incoming check messages are added to
// it (sigma_sum, the full marginal), and the saturated sigma_sum is stored
// as the marginal M on upd. M is kept across relay legs, which is how one
// leg's final marginals seed the next.
//
// The memory strength is drawn by a local 16-bit Galois LFSR (taps 0xB400)
// seeded with SEED on rng_seed and advanced on rng_step (once per leg). In
// the first leg every node uses cfg.beta0; later legs use
//     beta = beta_min + ((lfsr[7:0] * (beta_max - beta_min + 1)) >> 8),
// uniform over [beta_min, beta_max] to within 1/256. The data flow (two
// multiplications, subtraction, addition, init mux, saturation, marginal
// register) follows the published relay adder; the RNG kind, the draw and
// the saturation range are this design's choices.
//
// Timing: sigma_sum is combinational from mu, M and the RNG state; M and
// the LFSR update on the clock edge.
module relay_adder
  import relay_pkg::*;
#(
  parameter int          D    = DV,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        init,
  input  logic                        upd,
  input  logic                        rng_seed,
  input  logic                        rng_step,
  input  ms_cfg_t                     cfg,
  input  logic [MAG_W-1:0]            lambda0,
  input  logic signed [SUM_W-1:0]     mu [D],
  output logic signed [SUM_W-1:0]     sigma_sum,
  output logic signed [MARG_W-1:0]    marg,
  output logic [BETA_W-1:0]           beta
);
  localparam int P_W = MAG_W + BETA_W - MS_SHIFT + 1;
  localparam logic [15:0] SEED_NZ = (SEED == 16'h0) ? 16'h1 : SEED;

  // ---------------- RNG
  logic [15:0] lfsr;
  logic [5:0]  span;
  logic [13:0] scaled;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        lfsr <= SEED_NZ;
    else if (rng_seed) lfsr <= SEED_NZ;
    else if (rng_step) lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0);
  end
  assign span   = 6'(cfg.beta_max) - 6'(cfg.beta_min) + 6'd1;
  assign scaled = 14'(lfsr[7:0]) * 14'(span);
  assign beta   = cfg.first_leg ? cfg.beta0 : BETA_W'(cfg.beta_min + BETA_W'(scaled >> 8));

  // ---------------- bias
  logic [MAG_W-1:0]          m_abs;
  logic [P_W-1:0]            p_m, p_l;
  logic signed [SUM_W-1:0]   p_m_s, gamma_m, mixed, bias_raw, bias, acc;

  assign m_abs = marg[MARG_W-1] ? MAG_W'(-marg) : MAG_W'(marg);

  ms_mul #(.X_W(MAG_W), .BETA_W(BETA_W), .SHIFT(MS_SHIFT)) u_mul_m (.x(m_abs),   .beta(beta), .p(p_m));
  ms_mul #(.X_W(MAG_W), .BETA_W(BETA_W), .SHIFT(MS_SHIFT)) u_mul_l (.x(lambda0), .beta(beta), .p(p_l));

  always_comb begin
    p_m_s    = marg[MARG_W-1] ? -SUM_W'(p_m) : SUM_W'(p_m);   // (1-gamma) * M
    gamma_m  = SUM_W'(marg) - p_m_s;                          // gamma * M
    mixed    = gamma_m + SUM_W'(p_l);                         // + (1-gamma) * Lambda(0)
    bias_raw = init ? SUM_W'(lambda0) : mixed;
    bias     = sat_mag(bias_raw);
    acc      = bias;
    for (int k = 0; k < D; k++) acc = acc + mu[k];
    sigma_sum = acc;
  end

  logic signed [SUM_W-1:0] sum_sat;
  assign sum_sat = sat_mag(sigma_sum);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   marg <= '0;
    else if (upd) marg <= MARG_W'(sum_sat);
  end
endmodule
