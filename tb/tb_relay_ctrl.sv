// tb_relay_ctrl: drives the Relay-BP controller with a model of the array
// in which leg r reaches a valid estimate after K[r] iterations (or never),
// and checks: the cycle count 2k + 6 of a first-leg solution, the iteration
// limits T0 and Tr, the leg limit R, the solution count S (several
// solutions with S > 1), that a stale converged estimate at the start of a
// later leg is not counted twice, and that CN and VN phases alternate.
module tb_relay_ctrl;
  import relay_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, conv = 0;
  logic [IT_W-1:0] t0_max, tr_max, r_max, s_max;
  logic busy, done, init, cn_en, vn_en, leg_start, rng_seed, rng_step, first_leg, cand, clear;
  logic [4:0] t_iter;
  logic [IT_W-1:0] iters_total, legs, n_sol;
  int checks = 0, failures = 0;

  relay_ctrl dut (.*);
  always #5 clk = ~clk;

  // array model
  int kleg[8];
  int leg_m, it_m;
  bit ok_m;
  always_ff @(posedge clk) begin
    if (init) begin leg_m <= 0; it_m <= 0; ok_m <= (kleg[0] == 0); end
    else if (leg_start) begin leg_m <= leg_m + 1; it_m <= 0; end
    else if (vn_en) begin
      it_m <= it_m + 1;
      ok_m <= (kleg[leg_m] >= 0) && (it_m + 1 >= kleg[leg_m]);
    end
    conv <= ok_m;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(output int cycles);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; if (cycles > 50000) break; end
  endtask

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int cyc;
    t0_max = 80; tr_max = 60; r_max = 600; s_max = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    // 1) first leg converges after k iterations
    for (int k = 0; k < 12; k += 3) begin
      kleg = '{k, -1, -1, -1, -1, -1, -1, -1};
      run(cyc);
      expect_eq("cycles", cyc, 2*k + 6);
      expect_eq("iters", iters_total, k);
      expect_eq("legs", legs, 1);
      expect_eq("nsol", n_sol, 1);
    end
    // 2) first leg fails at T0, second leg converges after 4
    t0_max = 10; tr_max = 7;
    kleg = '{-1, 4, -1, -1, -1, -1, -1, -1};
    run(cyc);
    expect_eq("iters2", iters_total, 10 + 4);
    expect_eq("legs2", legs, 2);
    expect_eq("nsol2", n_sol, 1);
    // 3) no leg converges: R legs, T0 + (R-1) Tr iterations
    r_max = 5;
    kleg = '{-1, -1, -1, -1, -1, -1, -1, -1};
    run(cyc);
    expect_eq("iters3", iters_total, 10 + 4*7);
    expect_eq("legs3", legs, 5);
    expect_eq("nsol3", n_sol, 0);
    // 4) S = 3: legs 1,2,3 converge (leg 2 right away would be stale)
    s_max = 3; r_max = 8;
    kleg = '{2, 3, 1, -1, -1, -1, -1, -1};
    run(cyc);
    expect_eq("nsol4", n_sol, 3);
    expect_eq("legs4", legs, 3);
    expect_eq("iters4", iters_total, 2 + 3 + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // phases never overlap
  always @(posedge clk) if (rst_n && cn_en && vn_en) begin failures++; checks++; end
endmodule
