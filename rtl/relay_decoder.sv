// relay_decoder: fully parallel Relay-BP decoder for one decoding window.
//
// Every row of the windowed check matrix H~ gets its own check node unit
// and every column its own variable node unit; the edges of the decoding
// graph are fixed wires, generated from the neighbour functions of
// relay_pkg, so message storage lives in the interconnect rather than in a
// memory. Check i, slot s is wired to error node chk_nbr(i, s) on the slot
// of that node that points back to (i, s).
//
// Flow: start latches nothing; sigma (the window's detectors) and lambda
// (per-node priors) must stay stable while busy. The controller runs an
// init phase, then BP iterations of one CN and one VN clock each (flooding
// schedule), the convergence checker tests H~ e_hat = sigma after each
// iteration, and the relay of DMem-BP legs continues until S solutions or
// R legs. The lowest-weight solution found is on e_best when done pulses;
// success says whether any leg converged. Run-time settings: t0_max, tr_max
// (iterations of the first and of later legs), r_max (legs), s_max
// (solutions), and the memory-strength settings in ms_cfg.
//
// Sizes: NV = W (2 l m + l m) error nodes, NC = W l m checks; with the
// gross code (l = 12, m = 6) and W = 12 that is 2592 VNUs and 864 CNUs.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// disable condition of the assertions in the sub-blocks, which a linter
// reports as a reset used synchronously and asynchronously; the assertions
// are not logic.
module relay_decoder
  import relay_pkg::*;
#(
  parameter int L_BB = 12,
  parameter int M_BB = 6,
  parameter int W    = 12,
  localparam int NV  = nv_f(L_BB, M_BB, W),
  localparam int NC  = nc_f(L_BB, M_BB, W),
  localparam int WT_W = MAG_W + $clog2(NV + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [NC-1:0]            sigma,
  input  logic [NV-1:0][MAG_W-1:0] lambda,
  input  logic [IT_W-1:0]          t0_max,
  input  logic [IT_W-1:0]          tr_max,
  input  logic [IT_W-1:0]          r_max,
  input  logic [IT_W-1:0]          s_max,
  input  logic [BETA_W-1:0]        beta0,
  input  logic [BETA_W-1:0]        beta_min,
  input  logic [BETA_W-1:0]        beta_max,
  output logic                     busy,
  output logic                     done,
  output logic                     success,
  output logic [NV-1:0]            e_best,
  output logic [WT_W-1:0]          w_best,
  output logic [IT_W-1:0]          iters_total,
  output logic [IT_W-1:0]          legs
);
  // slot r of error node j that carries the edge to check i, slot s
  function automatic int back_slot(input int i, input int s);
    int j;
    j = chk_nbr(L_BB, M_BB, W, i, s);
    for (int r = 0; r < DV; r++)
      if (var_chk(L_BB, M_BB, W, j, r) == i && var_slot(L_BB, M_BB, W, j, r) == s) return r;
    return 0;
  endfunction

  logic init, cn_en, vn_en, leg_start, rng_seed, rng_step, first_leg, cand, clear, conv;
  logic [4:0] t_iter;
  logic [IT_W-1:0] n_sol_ctrl, n_sol_sel;
  logic [NV-1:0] e_hat;
  ms_cfg_t cfg;

  assign cfg = '{first_leg: first_leg, beta0: beta0, beta_min: beta_min, beta_max: beta_max};

  // message wires
  vmsg_t [DV-1:0] nu_v [NV];
  logic  [DC-1:0] mu_s [NC];
  logic  [DC-1:0] mu_c [NC];
  logic  [MAG_W-1:0] min1 [NC];
  logic  [MAG_W-1:0] min2 [NC];

  // ---------------- check node units
  for (genvar i = 0; i < NC; i++) begin : g_cnu
    vmsg_t [DC-1:0] nu_in;
    logic  [DC-1:0] valid;
    for (genvar s = 0; s < DC; s++) begin : g_s
      localparam int J = chk_nbr(L_BB, M_BB, W, i, s);
      if (J >= 0) begin : g_on
        localparam int R = back_slot(i, s);
        assign nu_in[s] = nu_v[J][R];
        assign valid[s] = 1'b1;
      end else begin : g_off
        assign nu_in[s] = '0;
        assign valid[s] = 1'b0;
      end
    end
    localparam logic [DC-1:0] VMASK = (i < M_BB * L_BB) ? 8'h7F : 8'hFF;
    cnu #(.D(DC), .VALID(VMASK)) u_cnu (
      .clk, .rst_n, .en(cn_en), .t_iter, .sigma(sigma[i]), .nu(nu_in),
      .mu_s(mu_s[i]), .mu_c(mu_c[i]), .min1(min1[i]), .min2(min2[i])
    );
  end

  // ---------------- variable node units
  for (genvar j = 0; j < NV; j++) begin : g_vnu
    cmsg_t [DV-1:0] cm_in;
    for (genvar r = 0; r < DV; r++) begin : g_r
      localparam int I = var_chk(L_BB, M_BB, W, j, r);
      if (I >= 0) begin : g_on
        localparam int S = var_slot(L_BB, M_BB, W, j, r);
        assign cm_in[r] = '{s: mu_s[I][S], c: mu_c[I][S], min1: min1[I], min2: min2[I]};
      end else begin : g_off
        assign cm_in[r] = '0;
      end
    end
    localparam logic [DV-1:0] VMASK =
      {var_chk(L_BB, M_BB, W, j, 2) >= 0, var_chk(L_BB, M_BB, W, j, 1) >= 0, 1'b1};
    localparam logic [15:0] SEED = 16'((j + 1) * 40503 + 12345);
    vnu #(.D(DV), .VALID(VMASK), .SEED(SEED)) u_vnu (
      .clk, .rst_n, .en(vn_en), .init, .leg_start, .rng_seed, .rng_step, .cfg,
      .lambda0(lambda[j]), .cm(cm_in), .nu(nu_v[j]), .e_hat(e_hat[j])
    );
  end

  conv_checker #(.L_BB(L_BB), .M_BB(M_BB), .W(W)) u_conv (
    .clk, .rst_n, .e_hat, .sigma, .conv
  );

  relay_ctrl u_ctrl (
    .clk, .rst_n, .start, .conv, .t0_max, .tr_max, .r_max, .s_max,
    .busy, .done, .init, .cn_en, .vn_en, .leg_start, .rng_seed, .rng_step,
    .first_leg, .cand, .clear, .t_iter, .iters_total, .legs, .n_sol(n_sol_ctrl)
  );

  solution_select #(.NV(NV)) u_sel (
    .clk, .rst_n, .clear, .cand, .e_hat, .lambda, .e_best, .w_best,
    .n_sol(n_sol_sel), .found(success)
  );
endmodule
