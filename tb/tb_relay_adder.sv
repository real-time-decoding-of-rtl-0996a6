// tb_relay_adder: random sequences of init / update / RNG steps against a
// reference model of the relay adder written here from the equations:
// LFSR (taps 0xB400), beta draw, bit-serial memory-strength product
// sum_k x_k * floor((beta << k) / 8), bias = sat((M - (1-g)M) + (1-g)L0) or
// L0 on init, sigma_sum = bias + sum(mu), M <= sat(sigma_sum) on update.
// Also checks the worked product 15 * 7 -> 11 through the bias path.
module tb_relay_adder;
  import relay_pkg::*;
  localparam int D = 3;
  localparam logic [15:0] SEED = 16'h1D2C;
  logic clk = 0, rst_n = 0, init = 0, upd = 0, rng_seed = 0, rng_step = 0;
  ms_cfg_t cfg;
  logic [MAG_W-1:0] lambda0 = 0;
  logic signed [SUM_W-1:0] mu [D];
  logic signed [SUM_W-1:0] sigma_sum;
  logic signed [MARG_W-1:0] marg;
  logic [BETA_W-1:0] beta;
  int checks = 0, failures = 0;

  relay_adder #(.D(D), .SEED(SEED)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mul(int x, int b);
    int p = 0;
    for (int k = 0; k < MAG_W; k++) if (x[k]) p += (b << k) >> MS_SHIFT;
    return p;
  endfunction
  function automatic int sat(int v);
    return v > MAXMAG ? MAXMAG : (v < -MAXMAG ? -MAXMAG : v);
  endfunction

  int r_lfsr, r_marg;
  task automatic check_comb();
    int b, pm, bias, s;
    b = cfg.first_leg ? int'(cfg.beta0)
                      : int'(cfg.beta_min) + (((r_lfsr & 255) * (int'(cfg.beta_max) - int'(cfg.beta_min) + 1)) >> 8);
    pm = mul(r_marg < 0 ? -r_marg : r_marg, b);
    if (r_marg < 0) pm = -pm;
    bias = init ? int'(lambda0) : sat(r_marg - pm + mul(lambda0, b));
    s = bias;
    for (int k = 0; k < D; k++) s += int'(mu[k]);
    checks += 3;
    if (int'(beta) != b)          begin failures++; $display("beta %0d exp %0d", beta, b); end
    if (int'(sigma_sum) != s)     begin failures++; $display("sum %0d exp %0d", sigma_sum, s); end
    if (int'(marg) != r_marg)     begin failures++; $display("marg %0d exp %0d", marg, r_marg); end
  endtask

  initial begin
    cfg = '{first_leg: 1'b1, beta0: 5'd7, beta_min: 5'd3, beta_max: 5'd10};
    foreach (mu[k]) mu[k] = '0;
    r_lfsr = SEED; r_marg = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // worked example: M = 15, beta = 7 -> (1-g)M = 11, gamma*M = 4
    @(negedge clk); init = 1; lambda0 = 15; upd = 1;
    @(negedge clk); r_marg = 15; init = 0; upd = 0; lambda0 = 0;
    #1 check_comb();
    checks++; if (sigma_sum != 4) begin failures++; $display("worked example %0d", sigma_sum); end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      init = ($urandom_range(0, 9) == 0);
      upd = $urandom_range(0, 1);
      rng_step = ($urandom_range(0, 3) == 0);
      rng_seed = ($urandom_range(0, 40) == 0);
      if ($urandom_range(0, 20) == 0) cfg.first_leg = ~cfg.first_leg;
      if ($urandom_range(0, 50) == 0) begin
        cfg.beta_min = 5'($urandom_range(0, 8)); cfg.beta_max = 5'($urandom_range(8, 16));
        cfg.beta0 = 5'($urandom_range(0, 16));
      end
      lambda0 = 4'($urandom);
      foreach (mu[k]) mu[k] = SUM_W'($urandom_range(0, 30)) - SUM_W'(15);
      #1 check_comb();
      @(posedge clk);
      if (upd) r_marg = sat(int'(sigma_sum));
      if (rng_seed) r_lfsr = SEED;
      else if (rng_step) r_lfsr = (r_lfsr >> 1) ^ ((r_lfsr & 1) ? 'hB400 : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
