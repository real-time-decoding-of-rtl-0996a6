// tb_regs_trace: checks reset values (the published iteration, leg and
// memory-strength settings), write/read-back of every configuration
// register and of the L matrix words, forwarding of table writes, the
// statistics read-out, the clear pulse, and the trace recorder (entries,
// their event bits and increasing time stamps, depth limit).
module tb_regs_trace;
  import relay_pkg::*;
  localparam int NQ = 72, K = 12, LW = 3, EV_N = 6, TD = 8;
  logic clk = 0, rst_n = 0, reg_we = 0, reg_re = 0, reg_rvalid;
  logic [15:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic clear; logic [3:0] commit; logic [IT_W-1:0] t0_max, tr_max, r_max, s_max;
  logic [BETA_W-1:0] beta0, beta_min, beta_max; logic [MAG_W-1:0] prior_data, prior_meas;
  logic [K-1:0][NQ-1:0] lmat; logic tbl_we; logic [7:0] tbl_addr; logic [9:0] tbl_data;
  logic [31:0] n_windows = 32'd11, n_converged = 32'd7, n_iters = 32'd1234;
  logic [EV_N-1:0] events = 0;
  int checks = 0, failures = 0;

  regs_trace #(.NQ(NQ), .K(K), .EV_N(EV_N), .TRACE_DEPTH(TD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, int d);
    @(negedge clk); reg_we = 1; reg_addr = 16'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(int a, output int d);
    @(negedge clk); reg_re = 1; reg_addr = 16'(a);
    @(negedge clk); reg_re = 0; d = reg_rdata;
  endtask
  task automatic chk(string n, int got, int exp);
    checks++; if (got != exp) begin failures++; $display("%s: %0d exp %0d", n, got, exp); end
  endtask

  initial begin
    int d, t_prev;
    int resets[12] = '{0, 0, 8, 80, 60, 600, 1, 7, 3, 10, 14, 14};
    repeat (2) @(posedge clk); rst_n = 1;
    rd(0, d); chk("id", d, 32'h52425031);
    for (int a = 2; a <= 11; a++) begin rd(a, d); chk("reset", d, resets[a]); end
    chk("t0 port", t0_max, 80); chk("r port", r_max, 600);
    for (int a = 2; a <= 11; a++) begin wr(a, a + 1); rd(a, d); chk("rw", d, a + 1); end
    chk("commit port", commit, 3); chk("beta_max port", beta_max, 10);
    for (int k = 0; k < K; k++) for (int w = 0; w < LW; w++) wr('h100 + k*LW + w, k*1000 + w*7 + 1);
    for (int k = 0; k < K; k++) begin
      for (int w = 0; w < LW; w++) begin rd('h100 + k*LW + w, d); chk("lword", d, k*1000 + w*7 + 1); end
      chk("lmat bits", int'(lmat[k][31:0]), k*1000 + 1);
    end
    fork wr('h1000 + 37, 'h2A5); join_none
    @(posedge clk); @(posedge clk); #1;
    chk("tbl_we", tbl_we, 1); chk("tbl_addr", tbl_addr, 37); chk("tbl_data", tbl_data, 'h2A5);
    @(negedge clk);
    rd('h10, d); chk("nwin", d, 11); rd('h11, d); chk("nconv", d, 7); rd('h12, d); chk("nit", d, 1234);
    // trace: 5 events, then more than the depth
    for (int e = 0; e < 5; e++) begin
      @(negedge clk); events = EV_N'(1 << e); @(negedge clk); events = 0; @(negedge clk);
    end
    rd('h13, d); chk("trace count", d, 5);
    t_prev = -1;
    for (int e = 0; e < 5; e++) begin
      rd('h2000 + e, d); chk("trace ev", d & 'h3F, 1 << e);
      checks++; if ((d >>> 6) <= t_prev) failures++;
      t_prev = d >>> 6;
    end
    for (int e = 0; e < 10; e++) begin @(negedge clk); events = 6'h3; end
    @(negedge clk); events = 0;
    rd('h13, d); chk("trace full", d, TD);
    fork wr(1, 1); join_none
    @(posedge clk); @(posedge clk); #1; chk("clear pulse", clear, 1);
    @(negedge clk); @(negedge clk);
    rd('h13, d); chk("trace cleared", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
