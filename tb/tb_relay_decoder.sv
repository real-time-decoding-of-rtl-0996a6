// tb_relay_decoder: end-to-end check of the Relay-BP decoder on a 3-cycle
// window of the [[72,12,6]] bivariate-bicycle code (324 error nodes, 108
// checks). The testbench builds H~ itself from the code polynomials, injects
// random error patterns of weight 1..4, and checks for each decode that
//   * a solution was found for every single error and that its weight is
//     not above the injected error's weight;
//   * every reported solution satisfies H~ e_best = sigma (independently
//     recomputed) and its reported weight is the sum of its priors;
//   * a first-leg solution takes exactly 2k + 6 clocks for k iterations.
// It also counts decodes that needed more than one relay leg.
module tb_relay_decoder;
  import relay_pkg::*;
  localparam int L = 6, M = 6, W = 3;
  localparam int NQ = 2*L*M, MD = L*M, NV = W*(NQ+MD), NC = W*MD;
  localparam int WT_W = MAG_W + $clog2(NV + 1);
  logic clk = 0, rst_n = 0, start = 0;
  logic [NC-1:0] sigma;
  logic [NV-1:0][MAG_W-1:0] lambda;
  logic [IT_W-1:0] t0_max, tr_max, r_max, s_max;
  logic [BETA_W-1:0] beta0, beta_min, beta_max;
  logic busy, done, success;
  logic [NV-1:0] e_best;
  logic [WT_W-1:0] w_best;
  logic [IT_W-1:0] iters_total, legs;
  int checks = 0, failures = 0;
  bit H [NC][NV];

  relay_decoder #(.L_BB(L), .M_BB(M), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NC-1:0] syn(logic [NV-1:0] e);
    logic [NC-1:0] s;
    for (int c = 0; c < NC; c++) begin
      automatic bit p = 0;
      for (int j = 0; j < NV; j++) p ^= H[c][j] & e[j];
      s[c] = p;
    end
    return s;
  endfunction

  initial begin
    automatic int ax[3] = '{3,0,0}, ay[3] = '{0,1,2}, bx[3] = '{0,1,2}, by[3] = '{3,0,0};
    logic [NV-1:0] e;
    int cyc, wt, wi, nerr, multi_leg, solved, k;
    for (int t = 0; t < W; t++)
      for (int i = 0; i < L; i++)
        for (int j = 0; j < M; j++) begin
          automatic int c = t*MD + i*M + j;
          for (int s = 0; s < 3; s++) begin
            H[c][t*NQ + ((i+ax[s])%L)*M + (j+ay[s])%M] = 1;
            H[c][t*NQ + L*M + ((i+bx[s])%L)*M + (j+by[s])%M] = 1;
          end
          H[c][W*NQ + t*MD + i*M + j] = 1;
          if (t > 0) H[c][W*NQ + (t-1)*MD + i*M + j] = 1;
        end
    for (int j = 0; j < NV; j++) lambda[j] = (j < W*NQ) ? 4'd12 : 4'd14;
    t0_max = 80; tr_max = 60; r_max = 20; s_max = 1;
    beta0 = 5'd7; beta_min = 5'd3; beta_max = 5'd10;
    sigma = '0;
    multi_leg = 0; solved = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      nerr = (n < 30) ? 1 : $urandom_range(2, 4);
      e = '0;
      for (int q = 0; q < nerr; q++) e[$urandom_range(0, NV-1)] = 1'b1;
      wi = 0;
      for (int j = 0; j < NV; j++) if (e[j]) wi += lambda[j];
      sigma = syn(e);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      if (legs > 1) multi_leg++;
      if (success) begin
        solved++;
        checks++;
        if (syn(e_best) != sigma) begin failures++; $display("decode %0d: e_best does not match sigma", n); end
        wt = 0;
        for (int j = 0; j < NV; j++) if (e_best[j]) wt += lambda[j];
        checks++;
        if (wt != int'(w_best)) failures++;
        if (legs == 1) begin
          checks++;
          if (cyc != 2*int'(iters_total) + 6) begin failures++; $display("cycles %0d iters %0d", cyc, iters_total); end
        end
      end
      if (nerr == 1) begin
        checks++;
        if (!success || int'(w_best) > wi) begin failures++; $display("single error %0d not decoded (success=%0d w=%0d)", n, success, w_best); end
      end
    end
    $display("solved %0d of 60, %0d needed more than one leg", solved, multi_leg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
