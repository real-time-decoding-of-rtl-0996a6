// solution_select: keeps the lowest-weight solution found by Relay-BP.
//
// When the controller reports a converged hard decision (cand = 1), the
// weight w(e) = sum_j e_j * lambda_j of that estimate is formed with the
// node priors as weights and compared with the best weight so far; a
// strictly lower weight replaces the stored estimate. clear (start of a
// decode) empties the store: best weight = all ones, no solution, count 0.
// The lowest-weight rule is the algorithm's; keeping it in a separate block
// and computing the weight in the cand cycle are this design's choices.
module solution_select
  import relay_pkg::*;
#(
  parameter int NV = 64,
  localparam int WT_W = MAG_W + $clog2(NV + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     cand,
  input  logic [NV-1:0]            e_hat,
  input  logic [NV-1:0][MAG_W-1:0] lambda,
  output logic [NV-1:0]            e_best,
  output logic [WT_W-1:0]          w_best,
  output logic [IT_W-1:0]          n_sol,
  output logic                     found
);
  logic [WT_W-1:0] w_cur;
  always_comb begin
    w_cur = '0;
    for (int j = 0; j < NV; j++) if (e_hat[j]) w_cur = w_cur + WT_W'(lambda[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_best <= '0; w_best <= '1; n_sol <= '0; found <= 1'b0;
    end else if (clear) begin
      e_best <= '0; w_best <= '1; n_sol <= '0; found <= 1'b0;
    end else if (cand) begin
      n_sol <= n_sol + 1'b1;
      found <= 1'b1;
      if (!found || w_cur < w_best) begin
        e_best <= e_hat;
        w_best <= w_cur;
      end
    end
  end
endmodule
