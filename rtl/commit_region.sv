// commit_region: commit-region identification of the sliding-window
// decoder.
//
// Given the window's error estimate e_hat and the run-time commit width C
// (1 <= C < W), keeps only the error nodes of the first C cycles of the
// window (e_com = e_hat AND commit mask) and computes the detector
// correction those committed errors leave in the first non-committed cycle,
// u = (H~ e_com) restricted to cycle C. u is carried into the first cycle of
// the next window, which starts C cycles later. For each possible C the
// parity of every check of cycle C is formed from its committed neighbours
// and the one selected by C is output. The mask-and-carry rule follows the
// published sliding-window algorithm (see the design notes for the mask);
// the logic is purely combinational.
module commit_region
  import relay_pkg::*;
#(
  parameter int L_BB = 12,
  parameter int M_BB = 6,
  parameter int W    = 12,
  localparam int NV  = nv_f(L_BB, M_BB, W),
  localparam int MD  = md_f(L_BB, M_BB)
) (
  input  logic [NV-1:0] e_hat,
  input  logic [3:0]    commit,
  output logic [NV-1:0] e_com,
  output logic [MD-1:0] u
);
  for (genvar j = 0; j < NV; j++) begin : g_mask
    localparam int T = var_cycle(L_BB, M_BB, W, j);
    assign e_com[j] = e_hat[j] && (int'(commit) > T);
  end

  logic [MD-1:0] par [W];
  assign par[0] = '0;
  for (genvar c = 1; c < W; c++) begin : g_cyc
    for (genvar k = 0; k < MD; k++) begin : g_k
      logic [DC-1:0] b;
      for (genvar s = 0; s < DC; s++) begin : g_s
        localparam int J = chk_nbr(L_BB, M_BB, W, c * MD + k, s);
        if (J >= 0) begin : g_on
          assign b[s] = e_com[J];
        end else begin : g_off
          assign b[s] = 1'b0;
        end
      end
      assign par[c][k] = ^b;
    end
  end

  always_comb begin
    u = '0;
    for (int c = 1; c < W; c++) if (int'(commit) == c) u = par[c];
  end
endmodule
