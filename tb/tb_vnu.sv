// tb_vnu: self-check of the variable node unit together with its relay
// adder. A reference model in the testbench keeps its own marginal and
// computes bias, sigma_sum, the exclusive outgoing messages and the hard
// decision for random check tuples, over an init phase, DMem-BP phases with
// a fixed beta0, a leg start and phases with random betas. The RNG draw is
// not modelled: the test reads the DUT's beta and checks it lies in
// [beta_min, beta_max], and that it changes over several legs.
module tb_vnu;
  import relay_pkg::*;
  localparam int D = 3;
  logic clk = 0, rst_n = 0, en = 0, init = 0, leg_start = 0, rng_seed = 0, rng_step = 0;
  ms_cfg_t cfg;
  logic [MAG_W-1:0] lambda0;
  cmsg_t [D-1:0] cm;
  vmsg_t [D-1:0] nu;
  logic e_hat;
  int checks = 0, failures = 0;

  vnu #(.D(D), .VALID(3'b111), .SEED(16'h1234)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mulr(int x, int b);
    int s = 0;
    for (int k = 0; k < MAG_W; k++) if ((x >> k) & 1) s += (b << k) >> MS_SHIFT;
    return s;
  endfunction
  function automatic int sat(int v);
    return v > 15 ? 15 : (v < -15 ? -15 : v);
  endfunction

  int ref_m;  // model marginal
  int mus[D];

  task automatic phase(bit do_init);
    int bias, ssum, b, pm, v;
    @(negedge clk);
    for (int k = 0; k < D; k++) begin
      cm[k].s = 1'($urandom_range(0, 1)); cm[k].c = 1'($urandom_range(0, 1));
      cm[k].min1 = MAG_W'($urandom_range(0, 15)); cm[k].min2 = MAG_W'($urandom_range(0, 15));
      mus[k] = do_init ? 0 : ((cm[k].c ? int'(cm[k].min2) : int'(cm[k].min1)) * (cm[k].s ? -1 : 1));
    end
    init = do_init; en = 1;
    #1;
    b = int'(dut.beta);
    if (do_init) bias = lambda0;
    else begin
      pm = mulr(ref_m < 0 ? -ref_m : ref_m, b);
      if (ref_m < 0) pm = -pm;
      bias = sat((ref_m - pm) + mulr(lambda0, b));
    end
    ssum = bias;
    for (int k = 0; k < D; k++) ssum += mus[k];
    @(negedge clk);
    en = 0; init = 0;
    for (int k = 0; k < D; k++) begin
      v = sat(ssum - mus[k]);
      checks++;
      if (nu[k].s != (v < 0) || int'(nu[k].m) != (v < 0 ? -v : v)) begin
        failures++;
        if (failures < 10) $display("nu[%0d] got %0d/%0d exp %0d", k, nu[k].s, nu[k].m, v);
      end
    end
    checks++;
    if (e_hat != (ssum < 0)) failures++;
    ref_m = sat(ssum);
    checks++;
    if (int'(dut.u_add.marg) != ref_m) begin failures++; $display("marg %0d exp %0d", dut.u_add.marg, ref_m); end
  endtask

  initial begin
    int b_prev, changes;
    cfg = '{first_leg: 1'b1, beta0: 5'd7, beta_min: 5'd3, beta_max: 5'd10};
    lambda0 = 4'd9;
    cm = '0;
    ref_m = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    phase(1);
    for (int n = 0; n < 300; n++) phase(0);
    // later legs: leg start resets nu to the prior, keeps the marginal
    cfg.first_leg = 0;
    changes = 0; b_prev = -1;
    for (int leg = 0; leg < 40; leg++) begin
      @(negedge clk); leg_start = 1; rng_step = 1;
      @(negedge clk); leg_start = 0; rng_step = 0;
      for (int k = 0; k < D; k++) begin
        checks++; if (nu[k].s || nu[k].m != lambda0) failures++;
      end
      checks++;
      if (int'(dut.u_add.marg) != ref_m) failures++;
      checks++;
      if (dut.beta < 3 || dut.beta > 10) failures++;
      if (int'(dut.beta) != b_prev) changes++;
      b_prev = dut.beta;
      lambda0 = 4'($urandom_range(0, 15));
      for (int n = 0; n < 5; n++) phase(0);
    end
    checks++;
    if (changes < 10) begin failures++; $display("beta changed only %0d times", changes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
