// tb_solution_select: feeds random candidate solutions and checks the
// stored best estimate, its weight (sum of priors of its set bits) and the
// solution count against a model, including a tie (equal weight must keep
// the earlier estimate) and clear.
module tb_solution_select;
  import relay_pkg::*;
  localparam int NV = 40;
  localparam int WT_W = MAG_W + $clog2(NV + 1);
  logic clk = 0, rst_n = 0, clear = 0, cand = 0;
  logic [NV-1:0] e_hat, e_best;
  logic [NV-1:0][MAG_W-1:0] lambda;
  logic [WT_W-1:0] w_best;
  logic [IT_W-1:0] n_sol;
  logic found;
  int checks = 0, failures = 0;

  solution_select #(.NV(NV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NV-1:0] mb;
    int mw, w, cnt;
    for (int j = 0; j < NV; j++) lambda[j] = MAG_W'($urandom_range(1, 15));
    lambda[1] = lambda[0];              // so that swapping bits 0 and 1 keeps the weight
    e_hat = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rnd = 0; rnd < 20; rnd++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      checks++; if (found || n_sol != 0) failures++;
      mw = -1; cnt = 0; mb = '0;
      for (int n = 0; n < 10; n++) begin
        if (n == 5) begin               // a different estimate of equal weight: a tie
          e_hat = mb;
          if (mb[0] != mb[1]) begin e_hat[0] = mb[1]; e_hat[1] = mb[0]; end
        end
        else for (int j = 0; j < NV; j++) e_hat[j] = ($urandom_range(0, 3) == 0);
        w = 0;
        for (int j = 0; j < NV; j++) if (e_hat[j]) w += lambda[j];
        cand = 1; @(negedge clk); cand = 0;
        cnt++;
        if (mw < 0 || w < mw) begin mw = w; mb = e_hat; end
        checks++;
        if (e_best != mb || int'(w_best) != mw || int'(n_sol) != cnt || !found) begin
          failures++;
          if (failures < 5) $display("w_best %0d exp %0d", w_best, mw);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
