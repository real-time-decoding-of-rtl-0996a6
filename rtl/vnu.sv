// vnu: variable (error) node unit of the fully parallel Relay-BP decoder.
//
// One VNU serves one column j of the windowed check matrix. In a VN phase
// (en = 1) it
//   * resolves the exclusive minimum of every incoming check tuple
//     (s, c, min1, min2): magnitude = c ? min2 : min1, negated when s = 1;
//   * adds these messages to the node's bias in the relay adder, giving the
//     full marginal sigma_sum;
//   * forms each outgoing message nu_{j->i} = sigma_sum - mu_{i->j}
//     (the sum over all other edges), saturated into sign + MAG_W bits;
//   * takes the hard decision e_hat = 1 when sigma_sum < 0.
// init marks the first Relay-BP iteration: the incoming messages are taken
// as zero and the bias is the prior, so the node emits nu = M = Lambda(0).
// leg_start starts a later relay leg: nu is reset to the prior while the
// marginal M and e_hat keep their values. The exclusive-minimum, adder-tree,
// exclusive-nu and hard-decision stages follow the published VNU; the
// leg_start input, the sign handling of zero and HD(0) = 0 are choices here.
//
// Timing: nu and e_hat are registered, one clock per VN phase. Edges marked
// absent in VALID output zero and take no input.
module vnu
  import relay_pkg::*;
#(
  parameter int           D     = DV,
  parameter logic [D-1:0] VALID = '1,
  parameter logic [15:0]  SEED  = 16'hACE1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               init,
  input  logic               leg_start,
  input  logic               rng_seed,
  input  logic               rng_step,
  input  ms_cfg_t            cfg,
  input  logic [MAG_W-1:0]   lambda0,
  input  cmsg_t [D-1:0]      cm,
  output vmsg_t [D-1:0]      nu,
  output logic               e_hat
);
  logic signed [SUM_W-1:0] mu [D];
  logic signed [SUM_W-1:0] sigma_sum;
  logic signed [MARG_W-1:0] marg;
  logic [BETA_W-1:0]        beta;

  // exclusive min calculation
  always_comb begin
    for (int k = 0; k < D; k++) begin
      logic [MAG_W-1:0] mag;
      mag   = cm[k].c ? cm[k].min2 : cm[k].min1;
      mu[k] = (init || !VALID[k]) ? '0
            : (cm[k].s ? -SUM_W'(mag) : SUM_W'(mag));
    end
  end

  relay_adder #(.D(D), .SEED(SEED)) u_add (
    .clk, .rst_n, .init, .upd(en), .rng_seed, .rng_step, .cfg, .lambda0,
    .mu, .sigma_sum, .marg, .beta
  );

  // exclusive nu calculation
  vmsg_t [D-1:0] nu_next;
  always_comb begin
    for (int k = 0; k < D; k++) begin
      logic signed [SUM_W-1:0] v;
      v = sat_mag(sigma_sum - mu[k]);
      nu_next[k].s = v[SUM_W-1];
      nu_next[k].m = v[SUM_W-1] ? MAG_W'(-v) : MAG_W'(v);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nu    <= '0;
      e_hat <= 1'b0;
    end else if (leg_start) begin
      for (int k = 0; k < D; k++) nu[k] <= VALID[k] ? vmsg_t'{s: 1'b0, m: lambda0} : '0;
    end else if (en) begin
      for (int k = 0; k < D; k++) nu[k] <= VALID[k] ? nu_next[k] : '0;
      e_hat <= sigma_sum[SUM_W-1];
    end
  end
endmodule
