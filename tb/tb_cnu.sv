// tb_cnu: random self-check of the check node unit. A reference model
// computes, for each edge, the exclusive sign product with sigma and the
// alpha-scaled exclusive minimum; the DUT's (s, c, min1, min2) tuple is
// resolved the way a VNU does and compared edge by edge. One edge is
// declared absent to cover a check of lower degree. The result must appear
// exactly one cycle after en.
module tb_cnu;
  import relay_pkg::*;
  localparam int D = 8;
  localparam logic [D-1:0] VALID = 8'b0111_1111;
  logic clk = 0, rst_n = 0, en = 0, sigma = 0;
  logic [4:0] t_iter;
  vmsg_t [D-1:0] nu;
  logic [D-1:0] mu_s, mu_c;
  logic [MAG_W-1:0] min1, min2;
  int checks = 0, failures = 0;

  cnu #(.D(D), .VALID(VALID)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exps, expm, mag, got, p, mn;
    t_iter = 1;
    nu = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      sigma = $urandom_range(0, 1);
      t_iter = 5'($urandom_range(1, 6));
      for (int j = 0; j < D; j++) begin
        nu[j].s = 1'($urandom_range(0, 1));
        nu[j].m = MAG_W'($urandom_range(0, 15));
      end
      en = 1;
      @(negedge clk);
      en = 0;
      for (int j = 0; j < D; j++) begin
        if (!VALID[j]) continue;
        p = sigma; mn = 15;
        for (int k = 0; k < D; k++)
          if (k != j && VALID[k]) begin
            p ^= nu[k].s;
            if (nu[k].m < mn) mn = nu[k].m;
          end
        expm = mn - (mn >> t_iter);
        exps = p;
        got = mu_c[j] ? min2 : min1;
        checks++;
        if (mu_s[j] != exps[0] || got != expm) begin
          failures++;
          if (failures < 10) $display("edge %0d: s=%0d/%0d m=%0d/%0d", j, mu_s[j], exps, got, expm);
        end
      end
    end
    // hold: with en low the outputs must not change
    begin
      logic [D-1:0] s0;
      s0 = mu_s;
      nu = ~nu; @(negedge clk);
      checks++; if (mu_s != s0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
