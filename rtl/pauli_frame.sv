// pauli_frame: logical Pauli frame calculation of the sliding-window
// decoder.
//
// After every window, the committed error estimate changes the logical
// frame by Delta f = A~ e_com. Here the logical action of a data-qubit
// error node of any window cycle is the matching column of the logical
// readout matrix L (K x NQ, a run-time input), and a measurement-error node
// has none, so Delta f = L (XOR over cycles of the committed data-qubit
// errors). f accumulates Delta f (f <- f xor Delta f) and each update is
// also output as a frame-update beat (df_valid, df). When the final
// codeword c arrives, L c is stored; the corrected logical observables are
// obs = L c xor f. clear resets frame and observables for a new experiment.
// The frame and observable equations are the published algorithm's; the
// way A~ is derived from L belongs to the phenomenological window used here.
//
// Timing: f, df and obs update one clock after upd / cw_valid.
module pauli_frame
  import relay_pkg::*;
#(
  parameter int L_BB = 12,
  parameter int M_BB = 6,
  parameter int W    = 12,
  parameter int K    = 12,
  localparam int NV  = nv_f(L_BB, M_BB, W),
  localparam int NQ  = nq_f(L_BB, M_BB)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic [K-1:0][NQ-1:0]   lmat,
  input  logic                   upd,
  input  logic [NV-1:0]          e_com,
  input  logic                   cw_valid,
  input  logic [NQ-1:0]          cw,
  output logic [K-1:0]           f,
  output logic                   df_valid,
  output logic [K-1:0]           df,
  output logic [K-1:0]           obs
);
  logic [NQ-1:0] fold;
  logic [K-1:0]  df_c, lc_c, lc;

  always_comb begin
    fold = '0;
    for (int t = 0; t < W; t++) fold ^= e_com[t*NQ +: NQ];
    for (int k = 0; k < K; k++) begin
      df_c[k] = ^(lmat[k] & fold);
      lc_c[k] = ^(lmat[k] & cw);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f <= '0; df <= '0; df_valid <= 1'b0; lc <= '0;
    end else if (clear) begin
      f <= '0; df <= '0; df_valid <= 1'b0; lc <= '0;
    end else begin
      df_valid <= upd;
      if (upd) begin
        f  <= f ^ df_c;
        df <= df_c;
      end
      if (cw_valid) lc <= lc_c;
    end
  end

  assign obs = lc ^ f;
endmodule
