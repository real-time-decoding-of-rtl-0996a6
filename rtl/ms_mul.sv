// ms_mul: reduced-logic memory-strength multiplier.
//
// Computes an approximation of x * beta / 2^SHIFT without a full multiplier.
// Every set bit k of the unsigned magnitude x contributes the term
// (beta << k) >> SHIFT, i.e. its partial product already divided by the
// scale M = 2^SHIFT with the fractional bits dropped; the terms are then
// summed. Example (M = 8): x = 15, beta = 7 gives 7 + 3 + 1 + 0 = 11, where
// the exact value is 105/8 = 13.1. This truncate-each-term scheme is the one
// the decoder uses; the widths are this design's choice.
//
// Purely combinational: p is valid in the same cycle as x and beta.
module ms_mul #(
  parameter int X_W    = 4,
  parameter int BETA_W = 5,
  parameter int SHIFT  = 3
) (
  input  logic [X_W-1:0]          x,
  input  logic [BETA_W-1:0]       beta,
  output logic [X_W+BETA_W-SHIFT:0] p
);
  localparam int T_W = X_W + BETA_W;
  localparam int P_W = X_W + BETA_W - SHIFT + 1;
  logic [X_W-1:0][P_W-1:0] term;
  for (genvar k = 0; k < X_W; k++) begin : g_term
    logic [T_W-1:0] shifted;
    assign shifted = T_W'(beta) << k;
    assign term[k] = x[k] ? P_W'(shifted >> SHIFT) : '0;
  end
  always_comb begin
    p = '0;
    for (int k = 0; k < X_W; k++) p = p + term[k];
  end
endmodule
