// windowing_decoder: (W, C) sliding-window decoder around the Relay-BP core.
//
// Data path: the item stream (syndrome rounds, final codeword, END markers)
// enters detector_window, which forms detector rows and offers a W-cycle
// window with the carried correction applied. window_ctrl starts the
// relay_decoder on it; when the decode is done, commit_region keeps the
// estimate's first C cycles and produces the carry for the next window,
// pauli_frame turns the committed errors into a logical frame update, and
// the window slides by C. After the codeword and W-1 END markers every
// detector row has been committed and obs_valid rises: obs = L c xor f is
// the corrected logical readout.
//
// Run-time settings (held by the register block): commit width C,
// iteration limits T0/Tr, legs R, solutions S, memory strengths (beta0 for
// the first leg, [beta_min, beta_max] for later legs), one prior for
// data-qubit error nodes and one for measurement-error nodes, and the
// logical readout matrix L. clear starts a new experiment (frame and
// statistics to zero). All blocks share one clock.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// disable condition of the assertions in the sub-blocks, which a linter
// reports as a reset used synchronously and asynchronously; the assertions
// are not logic.
module windowing_decoder
  import relay_pkg::*;
#(
  parameter int L_BB  = 12,
  parameter int M_BB  = 6,
  parameter int W     = 12,
  parameter int K     = 12,
  parameter int DEPTH = 16,
  localparam int NV   = nv_f(L_BB, M_BB, W),
  localparam int NC   = nc_f(L_BB, M_BB, W),
  localparam int NQ   = nq_f(L_BB, M_BB),
  localparam int MD   = md_f(L_BB, M_BB)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  // configuration
  input  logic [3:0]            commit,
  input  logic [IT_W-1:0]       t0_max,
  input  logic [IT_W-1:0]       tr_max,
  input  logic [IT_W-1:0]       r_max,
  input  logic [IT_W-1:0]       s_max,
  input  logic [BETA_W-1:0]     beta0,
  input  logic [BETA_W-1:0]     beta_min,
  input  logic [BETA_W-1:0]     beta_max,
  input  logic [MAG_W-1:0]      prior_data,
  input  logic [MAG_W-1:0]      prior_meas,
  input  logic [K-1:0][NQ-1:0]  lmat,
  // item stream
  input  logic                  in_valid,
  output logic                  in_ready,
  input  item_kind_e            in_kind,
  input  logic [NQ-1:0]         in_data,
  // results
  output logic                  df_valid,
  output logic [K-1:0]          df,
  output logic [K-1:0]          frame,
  output logic                  obs_valid,
  output logic [K-1:0]          obs,
  // statistics and trace events
  output logic [31:0]           n_windows,
  output logic [31:0]           n_converged,
  output logic [31:0]           n_iters,
  output logic                  ev_dec_start,
  output logic                  ev_dec_done,
  output logic [IT_W-1:0]       last_legs
);
  logic cw_valid, win_valid, win_ack, dec_start, dec_done, dec_success, dec_busy, frame_upd, idle;
  logic [NQ-1:0] cw;
  logic [NC-1:0] win_det;
  logic [MD-1:0] u_next;
  logic [NV-1:0] e_best, e_com;
  logic [IT_W-1:0] dec_iters;
  logic [$clog2(DEPTH):0] fill;
  logic [NV-1:0][MAG_W-1:0] lambda;

  for (genvar j = 0; j < NV; j++) begin : g_prior
    assign lambda[j] = (j < W * NQ) ? prior_data : prior_meas;
  end

  detector_window #(.L_BB(L_BB), .M_BB(M_BB), .W(W), .DEPTH(DEPTH)) u_win (
    .clk, .rst_n, .clear, .in_valid, .in_ready, .in_kind, .in_data, .cw_valid, .cw,
    .win_valid, .win_det, .win_ack, .commit, .u_next, .fill
  );

  window_ctrl u_wctl (
    .clk, .rst_n, .clear, .win_valid, .win_ack, .dec_start, .dec_done, .dec_success,
    .dec_iters, .frame_upd, .idle, .n_windows, .n_converged, .n_iters
  );

  relay_decoder #(.L_BB(L_BB), .M_BB(M_BB), .W(W)) u_relay (
    .clk, .rst_n, .start(dec_start), .sigma(win_det), .lambda,
    .t0_max, .tr_max, .r_max, .s_max, .beta0, .beta_min, .beta_max,
    .busy(dec_busy), .done(dec_done), .success(dec_success), .e_best,
    .w_best(), .iters_total(dec_iters), .legs(last_legs)
  );

  commit_region #(.L_BB(L_BB), .M_BB(M_BB), .W(W)) u_commit (
    .e_hat(e_best), .commit, .e_com, .u(u_next)
  );

  pauli_frame #(.L_BB(L_BB), .M_BB(M_BB), .W(W), .K(K)) u_frame (
    .clk, .rst_n, .clear, .lmat, .upd(frame_upd), .e_com, .cw_valid, .cw,
    .f(frame), .df_valid, .df, .obs
  );

  // observables are final once W-1 END rows followed the codeword and no
  // window is left to decode
  logic       cw_seen;
  logic [4:0] n_end;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cw_seen <= 1'b0; n_end <= '0;
    end else if (clear) begin
      cw_seen <= 1'b0; n_end <= '0;
    end else begin
      if (cw_valid) cw_seen <= 1'b1;
      if (cw_seen && in_valid && in_ready && in_kind == ITEM_END && n_end != '1) n_end <= n_end + 1'b1;
    end
  end
  assign obs_valid    = cw_seen && (int'(n_end) >= W - 1) && idle && !win_valid && !df_valid;
  assign ev_dec_start = dec_start;
  assign ev_dec_done  = dec_done;
endmodule
